// spime_top: SPiME, an array of NUM_PIMS parallel AES-128 processor-in-memory
// units.
//
// Every unit encrypts its own 128-bit block with its own key: data_in[i] and
// key[i] come from the host's plaintext and key buffers, data_out[i] goes to
// its ciphertext buffer. Clock, synchronous reset and start are global: one
// start pulse launches all units at once, and since the AES schedule is
// data-independent they all raise done[i] in the same cycle, 13 clock edges
// after the edge that samples start, encrypting NUM_PIMS*128 bits per
// operation. data_in and key must be held from start until done. A start
// given while the units are busy is ignored.
//
// The default NUM_PIMS = 4096 is the largest array the design was scaled to;
// 256, 512, 1024 and 2048 are the other evaluated sizes. Global clock, reset
// and start follow the SPiME block diagram; giving each unit its own
// plaintext and key port (rather than one broadcast bus) follows the text
// that has every unit read its own buffer entries.
module spime_top
  import spime_pkg::*;
#(
  parameter int unsigned NUM_PIMS = 4096
) (
  input  logic   clk,
  input  logic   rst,
  input  logic   start,
  input  block_t data_in  [NUM_PIMS],
  input  block_t key      [NUM_PIMS],
  output block_t data_out [NUM_PIMS],
  output logic   done     [NUM_PIMS]
);

  for (genvar i = 0; i < NUM_PIMS; i++) begin : g_pim
    pim_unit u_pim (
      .clk, .rst, .start,
      .data_in (data_in[i]),
      .key     (key[i]),
      .data_out(data_out[i]),
      .done    (done[i])
    );
  end

endmodule
