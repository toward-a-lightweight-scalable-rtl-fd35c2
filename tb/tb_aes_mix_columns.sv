// tb_aes_mix_columns: checks MixColumns on the well-known test columns
// db135345 -> 8e4da1bc, f20a225c -> 9fdc589d, 01010101 -> 01010101,
// c6c6c6c6 -> c6c6c6c6, then against the reference model on random states.
module tb_aes_mix_columns;
  import aes_ref_pkg::*;

  logic [127:0] din, dout;
  int checks = 0, failures = 0;

  aes_mix_columns dut (.data_in(din), .data_out(dout));

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
    din = 128'hdb135345_f20a225c_01010101_c6c6c6c6;
    #1 check(128'h8e4da1bc_9fdc589d_01010101_c6c6c6c6, "known");
    din = 128'hf20a225c_db135345_c6c6c6c6_01010101;
    #1 check(128'h9fdc589d_8e4da1bc_c6c6c6c6_01010101, "known-swapped");
    repeat (200) begin
      din = rand128();
      #1 check(ref_mix_columns(din), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
