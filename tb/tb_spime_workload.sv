// tb_spime_workload: encrypts whole messages of 1, 4, 16 and 64 Kbit
// (8, 32, 128 and 512 AES blocks), the message sizes the throughput study
// of this architecture uses, on a 64-unit array. The host side splits a
// message into 128-bit blocks, hands one block per unit (all under the same
// key, ECB style) and needs ceil(blocks / NUM_PIMS) operations per message;
// unused units in the last operation are fed zeros. Every ciphertext block
// is compared with the reference AES-128 model. For each message the
// testbench also counts clock cycles from the first start to the last done
// and checks them against the expected ops * (PIM_LATENCY + 2) - 2
// (launch-to-done 13 cycles, plus 2 idle cycles between operations while the
// controllers leave DONE and sample the next start), and prints the
// resulting bits per cycle.
module tb_spime_workload;
  import aes_ref_pkg::*;
  import spime_pkg::PIM_LATENCY;

  localparam int N = 64;

  logic         clk = 0, rst = 1, start = 0;
  logic [127:0] din [N], key [N], dout [N];
  logic         done [N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  spime_top #(.NUM_PIMS(N)) dut (.clk, .rst, .start, .data_in(din), .key,
                                 .data_out(dout), .done);

  task automatic run_message(int bits);
    int blocks, ops, cycles, bad;
    logic [127:0] k;
    logic [127:0] pt [];
    blocks = bits / 128;
    ops = (blocks + N - 1) / N;
    pt = new[blocks];
    foreach (pt[i]) pt[i] = rand128();
    k = rand128();
    bad = 0;
    cycles = 0;
    for (int op = 0; op < ops; op++) begin
      @(negedge clk);
      for (int u = 0; u < N; u++) begin
        int b = op * N + u;
        din[u] = (b < blocks) ? pt[b] : '0;
        key[u] = k;
      end
      start = 1;
      @(negedge clk);
      start = 0;
      cycles++;
      while (!done[0]) begin @(negedge clk); cycles++; end
      for (int u = 0; u < N; u++) begin
        int b = op * N + u;
        if (b < blocks) begin
          checks++;
          if (dout[u] != ref_encrypt(pt[b], k)) begin
            bad++; failures++;
            if (bad < 4) $display("FAIL %0d-bit message, block %0d", bits, b);
          end
        end
      end
      if (op != ops - 1) cycles++;   // the next start goes in on the following edge
    end
    // cycles counts edges from the first start sample to the last done, plus
    // one extra edge per operation spent in DONE/IDLE between operations.
    checks++;
    if (cycles - 1 != ops * (PIM_LATENCY + 2) - 2) begin
      failures++;
      $display("FAIL %0d-bit message took %0d cycles, expected %0d", bits, cycles - 1,
               ops * (PIM_LATENCY + 2) - 2);
    end
    $display("message %0d bits: %0d blocks, %0d operations, %0d cycles, %0d bits/cycle",
             bits, blocks, ops, cycles - 1, bits / (cycles - 1));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_init();
    for (int u = 0; u < N; u++) begin din[u] = '0; key[u] = '0; end
    repeat (3) @(negedge clk);
    rst = 0;
    run_message(1024);
    run_message(4096);
    run_message(16384);
    run_message(65536);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
