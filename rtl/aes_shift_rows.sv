// aes_shift_rows: the AES ShiftRows permutation.
//
// The 128-bit state is viewed as a 4x4 byte matrix, element [row][col] being
// byte 4*col+row of the vector (FIPS-197 order). Row r is rotated left by r
// positions: out[row][col] = in[row][(col+row) mod 4]. Row 0 is unchanged.
// Combinational, wiring only.
module aes_shift_rows
  import spime_pkg::*;
(
  input  block_t data_in,
  output block_t data_out
);

  always_comb begin
    for (int row = 0; row < 4; row++)
      for (int col = 0; col < 4; col++)
        data_out[BLOCK_W-1-8*(4*col+row) -: 8] =
          data_in[BLOCK_W-1-8*(4*((col+row)%4)+row) -: 8];
  end

endmodule
