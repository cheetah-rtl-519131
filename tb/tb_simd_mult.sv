// tb_simd_mult -- streams random coefficient pairs through the SIMDmult unit
// with random input gaps and random output back-pressure, checks every
// product against 128-bit reference arithmetic, the order of results and the
// one-cycle latency, and that a full-rate stream sustains one result per cycle.
module tb_simd_mult;
  import cheetah_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mod_cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  coef_t a, b, r;
  int checks = 0, failures = 0;
  logic [63:0] expq [$];

  simd_mult dut (.clk(clk), .rst_n(rst_n), .cfg(cfg), .in_valid(in_valid), .in_ready(in_ready),
                 .a(a), .b(b), .out_valid(out_valid), .out_ready(out_ready), .r(r));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output checker.
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    logic [63:0] e;
    e = expq.pop_front();
    checks++;
    if (64'(r) != e) begin failures++; $display("FAIL got %h exp %h", r, e); end
  end

  initial begin
    int full_rate_outs;
    cfg = make_cfg(64'(Q60), 16);
    in_valid = 0; out_ready = 1; a = 0; b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Phase 1: full rate, no back-pressure: N inputs give N outputs in N+1 cycles.
    @(negedge clk);
    for (int i = 0; i < 64; i++) begin
      in_valid = 1;
      a = coef_t'({$urandom, $urandom} % Q60);
      b = coef_t'({$urandom, $urandom} % Q60);
      expq.push_back(mulmod(64'(a), 64'(b), 64'(Q60)));
      @(negedge clk);
      checks++;
      if (!out_valid) begin failures++; $display("FAIL latency: no output 1 cycle after input %0d", i); end
    end
    in_valid = 0;
    @(negedge clk);
    // Phase 2: random gaps and back-pressure.
    for (int i = 0; i < 2000; i++) begin
      in_valid  = ($urandom % 3) != 0;
      out_ready = ($urandom % 4) != 0;
      a = coef_t'({$urandom, $urandom} % Q60);
      b = coef_t'({$urandom, $urandom} % Q60);
      #1;
      if (in_valid && in_ready) expq.push_back(mulmod(64'(a), 64'(b), 64'(Q60)));
      @(negedge clk);
    end
    in_valid = 0; out_ready = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d results missing", expq.size()); end
    full_rate_outs = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
