// tb_pim_controller: exercises the PiM controller on its own, with the AES
// core replaced by a small responder in this testbench that answers each
// aes_start with a one-cycle aes_done after a chosen delay and a chosen
// ciphertext. Checks, looking at signals on falling edges:
//  * aes_start rises one edge after start is sampled and lasts one cycle;
//  * the plaintext and key are routed to the core and the round-key bus
//    equals the reference AES-128 schedule of the key;
//  * done is a one-cycle pulse one edge after aes_done, and data_out holds
//    the captured ciphertext afterwards, even when aes_data_out changes;
//  * start while busy is ignored (no second aes_start);
//  * reset while waiting returns the controller to idle.
module tb_pim_controller;
  import aes_ref_pkg::*;

  logic          clk = 0, rst = 1, start = 0;
  logic [127:0]  din = '0, key = '0;
  logic          aes_start, aes_done = 0;
  logic [127:0]  aes_din, aes_key, aes_dout = '0, dout;
  logic [1407:0] aes_rk;
  logic          done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pim_controller dut (.clk, .rst, .start, .data_in(din), .key,
                      .aes_start, .aes_data_in(aes_din), .aes_key, .aes_round_keys_flat(aes_rk),
                      .aes_done, .aes_data_out(aes_dout), .data_out(dout), .done);

  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // One operation; the responder answers after 'delay' cycles of aes_start.
  task automatic op(int delay, logic [127:0] ct, bit poke_start_while_busy);
    logic [127:0] pt, k;
    pt = rand128(); k = rand128();
    @(negedge clk);
    din = pt; key = k; start = 1;
    @(negedge clk);
    start = 0;
    expect_true(aes_start, "aes_start one edge after start");
    expect_true(aes_din == pt && aes_key == k, "plaintext and key routed");
    expect_true(aes_rk == ref_round_keys_flat(k), "round keys = AES-128 schedule");
    @(negedge clk);
    expect_true(!aes_start, "aes_start one cycle only");
    if (poke_start_while_busy) start = 1;
    repeat (delay) begin
      @(negedge clk);
      expect_true(!aes_start, "no relaunch while busy");
      expect_true(!done, "no done before aes_done");
    end
    start = 0;
    aes_done = 1; aes_dout = ct;
    @(negedge clk);
    aes_done = 0; aes_dout = ~ct;
    expect_true(done, "done one edge after aes_done");
    expect_true(dout == ct, "ciphertext captured");
    @(negedge clk);
    expect_true(!done, "done one cycle only");
    expect_true(dout == ct, "ciphertext held");
    expect_true(!aes_start, "idle after done");
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
    @(negedge clk);
    expect_true(!aes_start && !done && dout == '0, "reset values");
    op(9,  FIPS_B_CT, 0);
    op(3,  FIPS_C_CT, 1);
    repeat (20) op(1 + $urandom_range(0, 15), rand128(), $urandom_range(0, 1) == 1);

    // Reset while waiting for the core.
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    repeat (3) @(negedge clk);
    rst = 1;
    @(negedge clk); rst = 0;
    expect_true(!aes_start && !done && dout == '0, "reset while waiting");
    aes_done = 1; aes_dout = 128'h1;
    @(negedge clk); aes_done = 0;
    expect_true(!done, "stale aes_done ignored after reset");
    op(5, FIPS_B_CT, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
