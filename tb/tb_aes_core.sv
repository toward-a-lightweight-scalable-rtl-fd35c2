// tb_aes_core: drives the iterative AES-128 core with precomputed round keys
// from the reference schedule and checks
//  * the FIPS-197 Appendix B and C.1 ciphertexts and 50 random blocks
//    against the reference cipher;
//  * latency: done rises exactly CORE_CYCLES = 11 clock edges after the edge
//    that samples start, and stays high for one cycle only;
//  * data_out holds the ciphertext after done;
//  * start held high re-launches immediately: one block per 12 cycles;
//  * a synchronous reset in the middle of a block aborts it (no done).
// Inputs are driven on the falling edge.
module tb_aes_core;
  import aes_ref_pkg::*;
  import spime_pkg::CORE_CYCLES;

  logic          clk = 0, rst = 1, start = 0;
  logic [127:0]  din = '0, key = '0, dout;
  logic [1407:0] rk = '0;
  logic          done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  aes_core dut (.clk, .rst, .start, .data_in(din), .key, .round_keys_flat(rk),
                .data_out(dout), .done);

  task automatic expect_eq(logic [127:0] got, logic [127:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got=%h exp=%h", what, got, exp);
    end
  endtask

  task automatic expect_int(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got=%0d exp=%0d", what, got, exp);
    end
  endtask

  // One block. Signals are looked at on falling edges, where they are
  // stable: done seen n falling edges after the one that raised start means
  // it rose n-1 rising edges after the edge that sampled start.
  task automatic run_block(logic [127:0] pt, logic [127:0] k, logic [127:0] exp_ct);
    int n;
    @(negedge clk);
    din = pt; key = k; rk = ref_round_keys_flat(k); start = 1;
    @(negedge clk); start = 0;
    n = 1;
    while (!done && n < 100) begin @(negedge clk); n++; end
    expect_int(n - 1, CORE_CYCLES, "latency");
    expect_eq(dout, exp_ct, "ciphertext");
    @(negedge clk);
    @(negedge clk);
    checks++;
    if (done) begin failures++; $display("FAIL done longer than one cycle"); end
    expect_eq(dout, exp_ct, "ciphertext held");
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_init();
    repeat (3) @(negedge clk);
    rst = 0;
    expect_eq(ref_encrypt(FIPS_B_PT, FIPS_B_KEY), FIPS_B_CT, "reference model B");
    expect_eq(ref_encrypt(FIPS_C_PT, FIPS_C_KEY), FIPS_C_CT, "reference model C");
    run_block(FIPS_B_PT, FIPS_B_KEY, FIPS_B_CT);
    run_block(FIPS_C_PT, FIPS_C_KEY, FIPS_C_CT);
    repeat (50) begin
      logic [127:0] p, k;
      p = rand128(); k = rand128();
      run_block(p, k, ref_encrypt(p, k));
    end

    // Back-to-back: start held high.
    begin
      int n;
      @(negedge clk);
      din = FIPS_C_PT; key = FIPS_C_KEY; rk = ref_round_keys_flat(FIPS_C_KEY); start = 1;
      while (!done) @(negedge clk);
      n = 0;
      do begin @(negedge clk); n++; end while (!done && n < 100);
      start = 0;
      expect_int(n, CORE_CYCLES + 1, "back-to-back period");
      expect_eq(dout, FIPS_C_CT, "back-to-back ciphertext");
      repeat (20) @(negedge clk);
    end

    // Reset in the middle of a block.
    begin
      bit seen;
      seen = 0;
      @(negedge clk);
      din = FIPS_B_PT; key = FIPS_B_KEY; rk = ref_round_keys_flat(FIPS_B_KEY); start = 1;
      @(negedge clk); start = 0;
      repeat (5) @(negedge clk);
      rst = 1;
      @(negedge clk); rst = 0;
      expect_eq(dout, '0, "data_out cleared by reset");
      repeat (20) begin @(posedge clk); if (done) seen = 1; end
      checks++;
      if (seen) begin failures++; $display("FAIL done after aborted block"); end
    end
    run_block(FIPS_B_PT, FIPS_B_KEY, FIPS_B_CT);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
