// tb_barrett_mulmod -- checks the Barrett multiplier against 128-bit '%'
// for several moduli (60-bit NTT prime, 31-bit Mersenne, 14-bit 12289) on
// random and extreme operands.
module tb_barrett_mulmod;
  import cheetah_pkg::*;
  import tb_ref_pkg::*;

  coef_t a, b, r;
  mod_cfg_t cfg;
  int checks = 0, failures = 0;

  barrett_mulmod dut (.a(a), .b(b), .cfg(cfg), .r(r));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(logic [63:0] q, logic [63:0] x, logic [63:0] y);
    logic [63:0] exp;
    a = coef_t'(x); b = coef_t'(y);
    #1;
    exp = mulmod(x, y, q);
    checks++;
    if (64'(r) != exp) begin
      failures++;
      if (failures < 10) $display("FAIL q=%h a=%h b=%h got=%h exp=%h", q, x, y, r, exp);
    end
  endtask

  initial begin
    logic [63:0] qs [3];
    qs[0] = 64'(Q60); qs[1] = 64'h7fffffff; qs[2] = 64'd12289;
    foreach (qs[m]) begin
      cfg = make_cfg(qs[m], 16);
      check_one(qs[m], qs[m] - 1, qs[m] - 1);
      check_one(qs[m], 0, qs[m] - 1);
      check_one(qs[m], 1, qs[m] - 1);
      for (int i = 0; i < 500; i++)
        check_one(qs[m], {$urandom, $urandom} % qs[m], {$urandom, $urandom} % qs[m]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
