// tb_partial_reduction -- random lane partials and random lane masks (including
// all lanes, one lane and none) through the SIMDadd tree with a lane count that
// is not a power of two; each sum is checked against a 128-bit reference,
// along with the one-cycle latency and back-pressure, and the number of sums
// that went through is checked as well.
module tb_partial_reduction;
  import cheetah_pkg::*;
  import tb_ref_pkg::*;
  localparam int LANES = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  coef_t q;
  logic lane_mask [LANES], in_valid [LANES];
  logic in_ready, out_valid, out_ready;
  ct_pair_t in [LANES], out;
  int checks = 0, failures = 0;
  int accepted = 0, returned = 0;
  logic [63:0] e0 [$], e1 [$];

  partial_reduction #(.LANES(LANES)) dut (.clk, .rst_n, .q, .lane_mask, .in_valid, .in_ready, .in,
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
    returned++;
    if (64'(out.c0) != x0 || 64'(out.c1) != x1) begin failures++; $display("FAIL got %h exp %h", out.c0, x0); end
  end

  initial begin
    logic [63:0] qq, s0, s1;
    logic v;
    qq = 64'(Q60); q = coef_t'(qq);
    for (int l = 0; l < LANES; l++) begin in_valid[l] = 0; lane_mask[l] = 0; in[l] = '0; end
    out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 1500; i++) begin
      @(negedge clk);
      v = ($urandom % 4) != 0;
      s0 = 0; s1 = 0;
      for (int l = 0; l < LANES; l++) begin
        in_valid[l] = v;
        lane_mask[l] = (i % 50 == 0) ? 1'b1 : (i % 50 == 1) ? (l == 2) : (i % 50 == 2) ? 1'b0 : 1'($urandom);
        in[l].c0 = (i % 7 == 0) ? coef_t'(qq - 1) : coef_t'({$urandom, $urandom} % qq);
        in[l].c1 = coef_t'({$urandom, $urandom} % qq);
        if (lane_mask[l]) begin s0 = addmod(s0, 64'(in[l].c0), qq); s1 = addmod(s1, 64'(in[l].c1), qq); end
      end
      out_ready = ($urandom % 4) != 0;
      #1;
      if (v && in_ready) begin e0.push_back(s0); e1.push_back(s1); accepted++; end
    end
    @(negedge clk);
    for (int l = 0; l < LANES; l++) in_valid[l] = 0;
    out_ready = 1;
    repeat (3) @(negedge clk);
    checks++;
    if (e0.size() != 0) begin failures++; $display("FAIL lost %0d", e0.size()); end
    // About 3/4 of the cycles offer data and about 3/4 accept it, so far more
    // than 500 sums must have gone through.
    checks++;
    if (accepted < 500 || returned != accepted) begin
      failures++; $display("FAIL accepted %0d returned %0d", accepted, returned);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
