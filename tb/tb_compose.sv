// tb_compose -- drives the swapped partial[0] stream and the 2*L product
// streams with independent random valid patterns; checks that slots are only
// taken when all streams are valid, and that each output equals
// p0 + sum prod0 and sum prod1 mod q (128-bit reference).
module tb_compose;
  import cheetah_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mod_cfg_t cfg;
  logic p0_valid, p0_ready, prod_ready, out_valid, out_ready;
  logic prod_valid [2][L];
  coef_t p0, prod [2][L];
  ct_pair_t out;
  int checks = 0, failures = 0;
  logic [63:0] e0 [$], e1 [$];

  compose #(.L_CT(L)) dut (.clk, .rst_n, .cfg, .p0_valid, .p0_ready, .p0, .prod_valid, .prod_ready, .prod,
    .out_valid, .out_ready, .out);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    logic [63:0] x0, x1;
    x0 = e0.pop_front(); x1 = e1.pop_front();
    checks += 2;
    if (64'(out.c0) != x0 || 64'(out.c1) != x1) begin failures++; $display("FAIL got %h/%h exp %h/%h", out.c0, out.c1, x0, x1); end
  end

  initial begin
    logic [63:0] q, s0, s1;
    logic allv;
    q = 64'(Q60);
    cfg = make_cfg(q, 16);
    p0_valid = 0; out_ready = 1; p0 = 0;
    for (int c = 0; c < 2; c++) for (int j = 0; j < L; j++) begin prod_valid[c][j] = 0; prod[c][j] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      p0_valid = ($urandom % 8) != 0;
      p0 = (i == 5) ? coef_t'(q - 1) : coef_t'({$urandom, $urandom} % q);
      allv = p0_valid;
      s0 = 64'(p0); s1 = 0;
      for (int c = 0; c < 2; c++) for (int j = 0; j < L; j++) begin
        prod_valid[c][j] = ($urandom % 8) != 0;
        prod[c][j] = (i == 5) ? coef_t'(q - 1) : coef_t'({$urandom, $urandom} % q);
        allv &= prod_valid[c][j];
        if (c == 0) s0 = addmod(s0, 64'(prod[c][j]), q); else s1 = addmod(s1, 64'(prod[c][j]), q);
      end
      out_ready = ($urandom % 4) != 0;
      #1;
      checks++;
      if ((p0_ready && !allv) || (prod_ready != p0_ready)) begin failures++; $display("FAIL join"); end
      if (p0_ready) begin e0.push_back(s0); e1.push_back(s1); end
    end
    @(negedge clk); p0_valid = 0; out_ready = 1;
    repeat (3) @(negedge clk);
    checks++;
    if (e0.size() != 0) begin failures++; $display("FAIL lost"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
