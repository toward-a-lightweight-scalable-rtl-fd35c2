// tb_spime_top: end-to-end test of the SPiME array at a reduced size
// (NUM_PIMS = 16). The testbench plays the host: it fills per-unit plaintext
// and key buffers with random values, pulses the global start, and checks
// every unit's ciphertext against the reference AES-128 model and that all
// units raise done in the same cycle, PIM_LATENCY = 13 edges after start.
// It makes each mechanism of the design happen and counts it:
//   parallel  - a whole-array operation (all units, distinct keys);
//   same_key  - all units under one shared key (broadcast key);
//   busy      - a start pulse while the units are busy, which must be
//               ignored (no early or extra done, results unchanged);
//   back2back - start held high so a new operation launches right after
//               the previous one completes;
//   reset     - a synchronous reset mid-operation, which must abort it.
// A mechanism that never happened counts as a failure.
module tb_spime_top;
  import aes_ref_pkg::*;
  import spime_pkg::PIM_LATENCY;

  localparam int N = 16;

  logic         clk = 0, rst = 1, start = 0;
  logic [127:0] din [N], key [N], dout [N], exp_ct [N];
  logic         done [N];
  int checks = 0, failures = 0;
  int n_parallel = 0, n_same_key = 0, n_busy = 0, n_back2back = 0, n_reset = 0;

  always #5 clk = ~clk;

  spime_top #(.NUM_PIMS(N)) dut (.clk, .rst, .start, .data_in(din), .key,
                                 .data_out(dout), .done);

  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic bit all_done();
    for (int i = 0; i < N; i++) if (!done[i]) return 0;
    return 1;
  endfunction

  function automatic bit any_done();
    for (int i = 0; i < N; i++) if (done[i]) return 1;
    return 0;
  endfunction

  task automatic fill(bit shared_key);
    logic [127:0] k0;
    k0 = rand128();
    for (int i = 0; i < N; i++) begin
      din[i] = rand128();
      key[i] = shared_key ? k0 : rand128();
      exp_ct[i] = ref_encrypt(din[i], key[i]);
    end
  endtask

  task automatic check_results(string what);
    int bad;
    bad = 0;
    for (int i = 0; i < N; i++) if (dout[i] != exp_ct[i]) begin
      bad++;
      if (bad < 4) $display("  unit %0d: got %h exp %h", i, dout[i], exp_ct[i]);
    end
    expect_true(bad == 0, what);
  endtask

  // Launch, wait for done; optionally poke start while busy.
  task automatic operation(bit shared_key, bit poke_busy);
    int n;
    @(negedge clk);
    fill(shared_key);
    start = 1;
    @(negedge clk);
    start = 0;
    n = 1;
    while (!any_done() && n < 100) begin
      @(negedge clk);
      n++;
      if (poke_busy && n == 6) begin
        start = 1;
        n_busy++;
      end else start = 0;
    end
    start = 0;
    expect_true(n - 1 == PIM_LATENCY, "array latency");
    expect_true(all_done(), "all units done together");
    check_results("ciphertexts");
    n_parallel++;
    if (shared_key) n_same_key++;
    @(negedge clk);
    expect_true(!any_done(), "done is one cycle");
    if (poke_busy) begin
      repeat (PIM_LATENCY + 3) begin
        @(negedge clk);
        expect_true(!any_done(), "busy start ignored");
      end
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_init();
    for (int i = 0; i < N; i++) begin din[i] = '0; key[i] = '0; end
    repeat (3) @(negedge clk);
    rst = 0;
    // FIPS vectors in two lanes, random elsewhere.
    @(negedge clk);
    fill(0);
    din[0] = FIPS_B_PT; key[0] = FIPS_B_KEY; exp_ct[0] = FIPS_B_CT;
    din[N-1] = FIPS_C_PT; key[N-1] = FIPS_C_KEY; exp_ct[N-1] = FIPS_C_CT;
    start = 1;
    @(negedge clk); start = 0;
    while (!any_done()) @(negedge clk);
    check_results("FIPS lanes");
    n_parallel++;

    repeat (5) operation(0, 0);
    repeat (3) operation(1, 0);
    repeat (3) operation(0, 1);

    // Back to back: start held high; the controller passes through DONE and IDLE, so the
    // second result follows PIM_LATENCY + 2 = 15 edges after the first.
    begin
      int n;
      @(negedge clk);
      fill(0);
      start = 1;
      while (!any_done()) @(negedge clk);
      check_results("back-to-back first");
      n = 0;
      do begin @(negedge clk); n++; end while (!any_done() && n < 100);
      start = 0;
      expect_true(n == PIM_LATENCY + 2, "back-to-back period");
      check_results("back-to-back second");
      n_back2back++;
      repeat (PIM_LATENCY + 3) @(negedge clk);
    end

    // Reset mid-operation.
    begin
      bit seen;
      seen = 0;
      @(negedge clk);
      fill(0);
      start = 1;
      @(negedge clk); start = 0;
      repeat (7) @(negedge clk);
      rst = 1;
      @(negedge clk); rst = 0;
      repeat (PIM_LATENCY + 5) begin @(negedge clk); if (any_done()) seen = 1; end
      expect_true(!seen, "reset aborts operation");
      for (int i = 0; i < N; i++) exp_ct[i] = '0;
      check_results("outputs cleared by reset");
      n_reset++;
    end
    operation(0, 0);

    $display("mechanisms: parallel=%0d same_key=%0d busy=%0d back2back=%0d reset=%0d",
             n_parallel, n_same_key, n_busy, n_back2back, n_reset);
    expect_true(n_parallel > 0, "parallel operation exercised");
    expect_true(n_same_key > 0, "shared key exercised");
    expect_true(n_busy > 0, "busy start exercised");
    expect_true(n_back2back > 0, "back-to-back exercised");
    expect_true(n_reset > 0, "reset abort exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
