// aes_sub_bytes: the AES SubBytes step, all 16 state bytes replaced through
// the S-box in parallel.
//
// Purely combinational: data_out follows data_in in the same cycle, which is
// what the AES core needs to finish one round per clock. Each byte lane is a
// lookup in the 256-entry constant spime_pkg::SBOX_ROM, so a synthesis tool
// is free to map it to LUT logic or to ROM, the two options the design allows.
//
// The S-box function follows the AES standard. The published SPiME
// description also gives this step a clocked packet wrapper (input_valid,
// packet_type == 2, a registered temp_data); it is not part of this module,
// because it would add a clock cycle to every round, which the 11-cycle
// encryption schedule has no room for.
module aes_sub_bytes
  import spime_pkg::*;
(
  input  block_t data_in,
  output block_t data_out
);

  always_comb begin
    for (int k = 0; k < 16; k++)
      data_out[BLOCK_W-1-8*k -: 8] = sbox(data_in[BLOCK_W-1-8*k -: 8]);
  end

endmodule
