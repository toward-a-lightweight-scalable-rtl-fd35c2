// pim_controller: the control unit of one PiM (processor-in-memory) unit.
//
// It does three jobs for its AES core:
//  * start/done handshake - a four-state FSM (IDLE, START_AES, WAIT_AES,
//    DONE). In IDLE a high start raises aes_start; START_AES drops it again,
//    so the core sees a one-cycle start pulse; WAIT_AES waits for aes_done,
//    then copies aes_data_out to data_out and raises done; DONE drops done
//    and returns to IDLE. start is only looked at in IDLE, so a start that
//    arrives while a block is in flight is ignored.
//  * data handling - the plaintext and key are routed to the core, and the
//    ciphertext is captured into data_out, which holds it until the next
//    block completes.
//  * key scheduling - an aes_key_expansion instance turns the key into the
//    1408-bit round-key bus the core consumes.
//
// Timing: aes_start is high in the cycle after start is sampled; done is a
// one-cycle pulse one cycle after aes_done, together with the new data_out.
// With the 11-cycle core, done rises 13 clock edges after the edge that
// samples start. data_in and key are not latched: like the core, the
// controller expects the source buffers to hold them from start to done.
// Reset (synchronous, active high) returns to IDLE and clears aes_start,
// done and, in this design, data_out as well.
//
// The FSM and its assignments follow the published SPiME controller. Placing
// the key schedule here, not latching the inputs and clearing data_out on
// reset are this design's choices.
module pim_controller
  import spime_pkg::*;
(
  input  logic     clk,
  input  logic     rst,
  input  logic     start,
  input  block_t   data_in,
  input  block_t   key,
  // to / from the AES core
  output logic     aes_start,
  output block_t   aes_data_in,
  output block_t   aes_key,
  output rk_flat_t aes_round_keys_flat,
  input  logic     aes_done,
  input  block_t   aes_data_out,
  // results
  output block_t   data_out,
  output logic     done
);

  typedef enum logic [1:0] {IDLE, START_AES, WAIT_AES, DONE} ctrl_state_e;
  ctrl_state_e state;

  assign aes_data_in = data_in;
  assign aes_key     = key;

  aes_key_expansion u_key_expansion (
    .key            (key),
    .round_keys_flat(aes_round_keys_flat)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= IDLE;
      aes_start <= 1'b0;
      done      <= 1'b0;
      data_out  <= '0;
    end else begin
      unique case (state)
        IDLE: if (start) begin
          aes_start <= 1'b1;
          state     <= START_AES;
        end
        START_AES: begin
          aes_start <= 1'b0;
          state     <= WAIT_AES;
        end
        WAIT_AES: if (aes_done) begin
          data_out <= aes_data_out;
          done     <= 1'b1;
          state    <= DONE;
        end
        DONE: begin
          done  <= 1'b0;
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  a_start_pulse: assert property (@(posedge clk) disable iff (rst) aes_start |=> !aes_start);
  a_done_pulse:  assert property (@(posedge clk) disable iff (rst) done |=> !done);

endmodule
