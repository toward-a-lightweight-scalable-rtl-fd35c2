// tb_aes_add_round_key: checks AddRoundKey on the FIPS-197 Appendix B first
// round (input 3243f6a8.. with key 2b7e1516.. gives 193de3be..) and on
// random state/key pairs, bit by bit against an XOR computed here.
module tb_aes_add_round_key;
  import aes_ref_pkg::*;

  logic [127:0] s, k, o;
  int checks = 0, failures = 0;

  aes_add_round_key dut (.state_in(s), .round_key(k), .state_out(o));

  task automatic check(logic [127:0] exp, string what);
    checks++;
    if (o !== exp) begin
      failures++;
      $display("FAIL %s: s=%h k=%h got=%h exp=%h", what, s, k, o, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    s = FIPS_B_PT; k = FIPS_B_KEY;
    #1 check(128'h193de3bea0f4e22b9ac68d2ae9f84808, "fips");
    repeat (200) begin
      logic [127:0] e;
      s = rand128(); k = rand128();
      for (int i = 0; i < 128; i++) e[i] = (s[i] != k[i]);
      #1 check(e, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
