// aes_add_round_key: the AES AddRoundKey step, a bitwise XOR of the 128-bit
// state with a 128-bit round key. Combinational. The AES core uses a single
// instance and selects, per FSM state, which state value and which round key
// reach it.
module aes_add_round_key
  import spime_pkg::*;
(
  input  block_t state_in,
  input  block_t round_key,
  output block_t state_out
);

  assign state_out = state_in ^ round_key;

endmodule
