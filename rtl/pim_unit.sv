// pim_unit: one PiM (processor-in-memory) encryption unit, a pim_controller
// driving an aes_core.
//
// clk, rst, start, the 128-bit plaintext data_in and the 128-bit key enter
// the controller; the controller launches the core with a one-cycle
// aes_start, supplies the plaintext and the expanded round keys, waits for
// the core's done, and presents the ciphertext on data_out with a one-cycle
// done pulse. done rises PIM_LATENCY = 13 clock edges after the edge that
// samples start (1 to launch, 11 in the core, 1 to capture). data_in and key
// must stay stable over that time.
module pim_unit
  import spime_pkg::*;
(
  input  logic   clk,
  input  logic   rst,
  input  logic   start,
  input  block_t data_in,
  input  block_t key,
  output block_t data_out,
  output logic   done
);

  logic     aes_start, aes_done;
  block_t   aes_data_in, aes_key, aes_data_out;
  rk_flat_t aes_round_keys_flat;

  pim_controller u_controller (
    .clk, .rst, .start, .data_in, .key,
    .aes_start, .aes_data_in, .aes_key, .aes_round_keys_flat,
    .aes_done, .aes_data_out,
    .data_out, .done
  );

  aes_core u_aes_core (
    .clk, .rst,
    .start          (aes_start),
    .data_in        (aes_data_in),
    .key            (aes_key),
    .round_keys_flat(aes_round_keys_flat),
    .data_out       (aes_data_out),
    .done           (aes_done)
  );

endmodule
