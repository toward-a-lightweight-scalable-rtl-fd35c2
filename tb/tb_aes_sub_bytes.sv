// tb_aes_sub_bytes: checks the combinational SubBytes step against the
// reference S-box: a few known S-box entries (0x00->0x63, 0x53->0xed,
// 0xff->0x16), every one of the 256 byte values in every lane position, and
// random states.
module tb_aes_sub_bytes;
  import aes_ref_pkg::*;

  logic [127:0] din, dout;
  int checks = 0, failures = 0;

  aes_sub_bytes dut (.data_in(din), .data_out(dout));

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
    din = {16{8'h00}}; #1 check({16{8'h63}}, "00");
    din = {16{8'h53}}; #1 check({16{8'hed}}, "53");
    din = {16{8'hff}}; #1 check({16{8'h16}}, "ff");
    for (int v = 0; v < 256; v++) begin
      for (int k = 0; k < 16; k++) din[127-8*k -: 8] = 8'(v + 17*k);
      #1 check(ref_sub_bytes(din), "sweep");
    end
    repeat (200) begin
      din = rand128();
      #1 check(ref_sub_bytes(din), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
