// aes_mix_columns: the AES MixColumns step.
//
// Each column (s0,s1,s2,s3) of the state is replaced by
//   m0 = 2*s0 ^ 3*s1 ^   s2 ^   s3
//   m1 =   s0 ^ 2*s1 ^ 3*s2 ^   s3
//   m2 =   s0 ^   s1 ^ 2*s2 ^ 3*s3
//   m3 = 3*s0 ^   s1 ^   s2 ^ 2*s3
// in GF(2^8), with 2*b the shift-and-reduce (0x1b) xtime and 3*b = 2*b ^ b
// (spime_pkg::mul_by_2 / mul_by_3). Combinational; the four columns are
// processed side by side.
module aes_mix_columns
  import spime_pkg::*;
(
  input  block_t data_in,
  output block_t data_out
);

  always_comb begin
    for (int c = 0; c < 4; c++) begin
      logic [7:0] s0, s1, s2, s3;
      s0 = data_in[BLOCK_W-1-32*c      -: 8];
      s1 = data_in[BLOCK_W-1-32*c - 8  -: 8];
      s2 = data_in[BLOCK_W-1-32*c - 16 -: 8];
      s3 = data_in[BLOCK_W-1-32*c - 24 -: 8];
      data_out[BLOCK_W-1-32*c      -: 8] = mul_by_2(s0) ^ mul_by_3(s1) ^ s2 ^ s3;
      data_out[BLOCK_W-1-32*c - 8  -: 8] = s0 ^ mul_by_2(s1) ^ mul_by_3(s2) ^ s3;
      data_out[BLOCK_W-1-32*c - 16 -: 8] = s0 ^ s1 ^ mul_by_2(s2) ^ mul_by_3(s3);
      data_out[BLOCK_W-1-32*c - 24 -: 8] = mul_by_3(s0) ^ s1 ^ s2 ^ mul_by_2(s3);
    end
  end

endmodule
