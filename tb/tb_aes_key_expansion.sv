// tb_aes_key_expansion: checks the AES-128 key schedule. For the FIPS-197
// Appendix A.1 key 2b7e1516.. it compares round keys 1 and 10 with the
// published words (a0fafe17 88542cb1 23a33939 2a6c7605 and
// d014f9a8 c9ee2589 e13f0cc8 b6630ca6); for random keys it compares all
// eleven round keys with the reference schedule.
module tb_aes_key_expansion;
  import aes_ref_pkg::*;

  logic [127:0]  key;
  logic [1407:0] rk;
  int checks = 0, failures = 0;

  aes_key_expansion dut (.key(key), .round_keys_flat(rk));

  task automatic check(int r, logic [127:0] exp, string what);
    checks++;
    if (rk[128*r +: 128] !== exp) begin
      failures++;
      $display("FAIL %s: key=%h rk[%0d]=%h exp=%h", what, key, r, rk[128*r +: 128], exp);
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
    key = FIPS_B_KEY;
    #1;
    check(0,  FIPS_B_KEY, "fips rk0");
    check(1,  128'ha0fafe1788542cb123a339392a6c7605, "fips rk1");
    check(10, 128'hd014f9a8c9ee2589e13f0cc8b6630ca6, "fips rk10");
    repeat (100) begin
      key = rand128();
      #1;
      for (int r = 0; r < 11; r++) check(r, ref_round_key(key, r), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
