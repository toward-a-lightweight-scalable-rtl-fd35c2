// aes_key_expansion: Rijndael key schedule for AES-128.
//
// Expands the 128-bit cipher key into the 44 words w[0..43] and packs them as
// 11 round keys on a 1408-bit flat bus, round key i = {w[4i],..,w[4i+3]} in
// bits [128*i +: 128] (round key 0 is the cipher key itself). The schedule is
//   w[i] = w[i-4] ^ SubWord(RotWord(w[i-1])) ^ {Rcon, 24'h0}   for i % 4 == 0
//   w[i] = w[i-4] ^ w[i-1]                                      otherwise
// with Rcon starting at 0x01 and doubled in GF(2^8) each round.
//
// The whole schedule is combinational, so the round keys are valid in the
// same cycle as the key (a "precomputed" round-key bus for the core). It
// costs 40 S-box lookups; the design keeps it this way so the core can take
// one round per cycle without waiting on the schedule.
module aes_key_expansion
  import spime_pkg::*;
(
  input  block_t   key,
  output rk_flat_t round_keys_flat
);

  logic [31:0] w [44];

  always_comb begin
    logic [31:0] t;
    logic [7:0]  rcon;
    rcon = 8'h01;
    for (int i = 0; i < 4; i++) w[i] = key[BLOCK_W-1-32*i -: 32];
    for (int i = 4; i < 44; i++) begin
      t = w[i-1];
      if (i % 4 == 0) begin
        t = {sbox(t[23:16]), sbox(t[15:8]), sbox(t[7:0]), sbox(t[31:24])}
            ^ {rcon, 24'h0};
        rcon = mul_by_2(rcon);
      end
      w[i] = w[i-4] ^ t;
    end
    for (int r = 0; r < 11; r++)
      round_keys_flat[BLOCK_W*r +: BLOCK_W] = {w[4*r], w[4*r+1], w[4*r+2], w[4*r+3]};
  end

endmodule
