// tb_pim_unit: one complete PiM unit (controller + AES core). Encrypts the
// FIPS-197 example blocks and random blocks, compares each ciphertext with
// the reference cipher, and checks the unit latency: done rises
// PIM_LATENCY = 13 edges after the edge that samples start (one to launch
// the core, 11 in the core, one to capture) and is one cycle long. Also
// checks that a start held high during a block does not disturb it and that
// reset mid-block suppresses its done.
module tb_pim_unit;
  import aes_ref_pkg::*;
  import spime_pkg::PIM_LATENCY;

  logic         clk = 0, rst = 1, start = 0;
  logic [127:0] din = '0, key = '0, dout;
  logic         done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pim_unit dut (.clk, .rst, .start, .data_in(din), .key, .data_out(dout), .done);

  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic run_block(logic [127:0] pt, logic [127:0] k, bit hold_start);
    int n;
    logic [127:0] exp_ct;
    exp_ct = ref_encrypt(pt, k);
    @(negedge clk);
    din = pt; key = k; start = 1;
    @(negedge clk);
    start = hold_start;
    n = 1;
    while (!done && n < 100) begin @(negedge clk); n++; end
    start = 0;
    checks++;
    if (n - 1 != PIM_LATENCY) begin
      failures++; $display("FAIL latency %0d, expected %0d", n - 1, PIM_LATENCY);
    end
    expect_true(dout == exp_ct, "ciphertext");
    @(negedge clk);
    expect_true(!done, "done one cycle");
    expect_true(dout == exp_ct, "ciphertext held");
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
    run_block(FIPS_B_PT, FIPS_B_KEY, 0);
    run_block(FIPS_C_PT, FIPS_C_KEY, 1);
    repeat (30) run_block(rand128(), rand128(), $urandom_range(0, 1) == 1);
    // Reset in the middle of a block.
    begin
      bit seen;
      seen = 0;
      @(negedge clk); din = FIPS_B_PT; key = FIPS_B_KEY; start = 1;
      @(negedge clk); start = 0;
      repeat (6) @(negedge clk);
      rst = 1;
      @(negedge clk); rst = 0;
      repeat (20) begin @(negedge clk); if (done) seen = 1; end
      expect_true(!seen, "no done after aborted block");
    end
    run_block(FIPS_B_PT, FIPS_B_KEY, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
