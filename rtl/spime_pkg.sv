// spime_pkg: types, constants and GF(2^8) helpers shared by the SPiME
// (Secure Processor-in-Memory Encryption) array.
//
// The AES-128 state is carried as a 128-bit vector in the usual FIPS-197
// order: byte k (k = 0..15) sits in bits [127-8k -: 8] and is state element
// row k%4, column k/4, so the first byte of a plaintext is the most
// significant byte of the vector. Round keys travel on a 1408-bit flat bus
// with round key i in bits [128*i +: 128], the layout the design's AES core
// unpacks.
//
// The S-box is not pasted in as numbers: SBOX_ROM is computed at
// elaboration from its definition, the multiplicative inverse in GF(2^8)
// modulo x^8+x^4+x^3+x+1 (0 maps to 0) followed by the affine map
// b ^ rotl(b,1) ^ rotl(b,2) ^ rotl(b,3) ^ rotl(b,4) ^ 0x63. Synthesis sees a
// 256-entry constant, i.e. a ROM or LUT logic.
//
// Timing constants: the core takes CORE_CYCLES = 11 cycles (INIT, 9 ROUND,
// FINAL) per block; a PiM unit adds one cycle for the controller to launch
// the core and one to capture the result.
package spime_pkg;

  localparam int unsigned BLOCK_W     = 128;
  localparam int unsigned NUM_RKEYS   = 11;
  localparam int unsigned RK_FLAT_W   = BLOCK_W * NUM_RKEYS;   // 1408
  localparam int unsigned FULL_ROUNDS = 9;    // rounds with MixColumns
  localparam int unsigned CORE_CYCLES = 11;   // INIT + 9 ROUND + FINAL
  localparam int unsigned PIM_LATENCY = CORE_CYCLES + 2;

  typedef logic [BLOCK_W-1:0]   block_t;
  typedef logic [RK_FLAT_W-1:0] rk_flat_t;

  // Multiplication by 2 (xtime): shift left, reduce by 0x1b if bit 7 was set.
  function automatic logic [7:0] mul_by_2(input logic [7:0] b);
    return {b[6:0], 1'b0} ^ (b[7] ? 8'h1b : 8'h00);
  endfunction

  // Multiplication by 3 = mul_by_2(b) ^ b.
  function automatic logic [7:0] mul_by_3(input logic [7:0] b);
    return mul_by_2(b) ^ b;
  endfunction

  // General GF(2^8) product, shift-and-add.
  function automatic logic [7:0] gf_mul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, x;
    p = 8'h00;
    x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ x;
      x = mul_by_2(x);
    end
    return p;
  endfunction

  // Inverse as a^254 (square-and-multiply); 0 maps to 0.
  function automatic logic [7:0] gf_inv(input logic [7:0] a);
    logic [7:0] r, sq;
    r  = 8'h01;
    sq = a;
    for (int i = 0; i < 8; i++) begin
      if (i != 0) r = gf_mul(r, sq);   // 254 = 0b11111110
      sq = gf_mul(sq, sq);
    end
    return r;
  endfunction

  function automatic logic [7:0] sbox_calc(input logic [7:0] a);
    logic [7:0] b;
    b = gf_inv(a);
    return b ^ {b[6:0], b[7]} ^ {b[5:0], b[7:6]} ^ {b[4:0], b[7:5]}
             ^ {b[3:0], b[7:4]} ^ 8'h63;
  endfunction

  typedef logic [7:0] sbox_rom_t [256];

  function automatic sbox_rom_t build_sbox();
    sbox_rom_t t;
    for (int i = 0; i < 256; i++) t[i] = sbox_calc(8'(i));
    return t;
  endfunction

  // The S-box as a 256 x 8 constant array (a ROM).
  localparam sbox_rom_t SBOX_ROM = build_sbox();

  function automatic logic [7:0] sbox(input logic [7:0] a);
    return SBOX_ROM[a];
  endfunction

  // Byte k of a state vector (FIPS-197 input order).
  function automatic logic [7:0] get_byte(input block_t s, input int unsigned k);
    return s[BLOCK_W-1-8*k -: 8];
  endfunction

endpackage
