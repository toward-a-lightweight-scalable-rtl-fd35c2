// aes_core: iterative AES-128 encryption engine, one round per clock.
//
// A four-state FSM sequences the cipher:
//   IDLE  - waits for start; done is cleared here, so done is a one-cycle
//           pulse in the cycle after FINAL.
//   INIT  - round counter := 0, state := data_in ^ round_keys[0].
//   ROUND - state := MixColumns(ShiftRows(SubBytes(state))) ^
//           round_keys[round+1], round := round+1. Left for FINAL once the
//           counter reaches 9, i.e. after 9 ROUND cycles (rounds 1..9).
//   FINAL - state := ShiftRows(SubBytes(state)) ^ round_keys[10]; the same
//           value is written to data_out and done is set.
// From the clock edge that samples start to the edge that raises done is
// exactly 11 cycles (INIT + 9 ROUND + FINAL), independent of the data.
//
// Interface: clk, synchronous active-high rst (clears FSM, counter, state,
// done and data_out), start, data_in (plaintext), key, and round_keys_flat,
// the 11 precomputed round keys (key i in bits [128*i +: 128]); outputs
// data_out (ciphertext, held until the next block finishes) and done. The
// caller must hold data_in and round_keys_flat stable from start until done.
//
// The round datapath is the three combinational step modules plus a single
// AddRoundKey XOR whose operands are chosen by the FSM state. The key input
// is not needed by the datapath, since every round key arrives on
// round_keys_flat; it is kept on the interface and used only by an assertion
// that round key 0 equals the cipher key, which catches a round-key bus
// expanded from a different key.
//
// Departures from a literal reading of the usual pseudo-code for this FSM,
// made so that the result is AES-128: the exit test is taken on the value
// the counter is about to reach (round+1 == 9), which gives 9 ROUND cycles
// and not 10; and data_out is loaded with the final AddRoundKey result
// itself rather than with the state register's previous value.
module aes_core
  import spime_pkg::*;
(
  input  logic     clk,
  input  logic     rst,
  input  logic     start,
  input  block_t   data_in,
  input  block_t   key,
  input  rk_flat_t round_keys_flat,
  output block_t   data_out,
  output logic     done
);

  typedef enum logic [1:0] {IDLE, INIT, ROUND, FINAL} core_state_e;

  core_state_e current_state, next_state;
  block_t      state;
  logic [3:0]  round;
  block_t      round_keys [NUM_RKEYS];

  block_t sub_bytes_out, shift_rows_out, mix_columns_out;
  block_t ark_state, ark_key, ark_out;

  always_comb begin
    for (int i = 0; i < NUM_RKEYS; i++)
      round_keys[i] = round_keys_flat[BLOCK_W*i +: BLOCK_W];
  end

  aes_sub_bytes     u_sub_bytes   (.data_in(state),          .data_out(sub_bytes_out));
  aes_shift_rows    u_shift_rows  (.data_in(sub_bytes_out),  .data_out(shift_rows_out));
  aes_mix_columns   u_mix_columns (.data_in(shift_rows_out), .data_out(mix_columns_out));
  aes_add_round_key u_add_rk      (.state_in(ark_state), .round_key(ark_key),
                                   .state_out(ark_out));

  always_comb begin
    unique case (current_state)
      INIT:    begin ark_state = data_in;         ark_key = round_keys[0];                end
      ROUND:   begin ark_state = mix_columns_out; ark_key = round_keys[4'(round + 4'd1)]; end
      default: begin ark_state = shift_rows_out;  ark_key = round_keys[NUM_RKEYS-1];       end
    endcase
  end

  always_comb begin
    unique case (current_state)
      IDLE:    next_state = start ? INIT : IDLE;
      INIT:    next_state = ROUND;
      ROUND:   next_state = (round + 4'd1 == 4'(FULL_ROUNDS)) ? FINAL : ROUND;
      FINAL:   next_state = IDLE;
      default: next_state = IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      current_state <= IDLE;
      state         <= '0;
      round         <= '0;
      done          <= 1'b0;
      data_out      <= '0;
    end else begin
      current_state <= next_state;
      unique case (current_state)
        IDLE:  done <= 1'b0;
        INIT: begin
          round <= '0;
          state <= ark_out;
        end
        ROUND: begin
          state <= ark_out;
          round <= round + 4'd1;
        end
        FINAL: begin
          state    <= ark_out;
          data_out <= ark_out;
          done     <= 1'b1;
        end
        default: ;
      endcase
    end
  end

  // done is a single-cycle pulse.
  a_done_pulse: assert property (@(posedge clk) disable iff (rst) done |=> !done);
  // The round-key bus must belong to the key presented with start.
  a_rk0_is_key: assert property (@(posedge clk) disable iff (rst)
                                 (current_state == IDLE && start) |-> (round_keys[0] == key));

endmodule
