// tb_aes_shift_rows: checks ShiftRows against a hand-written permutation of
// the byte indices 0..15 (FIPS-197: output byte order 0,5,10,15,4,9,14,3,
// 8,13,2,7,12,1,6,11) and against the reference model on random states.
module tb_aes_shift_rows;
  import aes_ref_pkg::*;

  logic [127:0] din, dout;
  int checks = 0, failures = 0;

  aes_shift_rows dut (.data_in(din), .data_out(dout));

  task automatic check(logic [127:0] exp, string what);
    checks++;
    if (dout !== exp) begin
      failures++;
      $display("FAIL %s: in=%h got=%h exp=%h", what, din, dout, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_init();
    din = 128'h000102030405060708090a0b0c0d0e0f;
    #1 check(128'h00050a0f04090e03080d02070c01060b, "index");
    repeat (200) begin
      din = rand128();
      #1 check(ref_shift_rows(din), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
