// tb_ntt_unit -- runs a forward NTT on random polynomials and compares every
// slot with a direct evaluation a(psi^(2*bitrev(j)+1)) mod q, then runs the
// inverse NTT on the result and expects the original coefficients back. The
// twiddle SRAM is modelled by two tables built from psi. The cycle count of a
// whole transform (N + N/2*log2N + N) is checked too.
module tb_ntt_unit;
  import cheetah_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 64;
  localparam int LOGN = $clog2(N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mod_cfg_t cfg;
  logic inverse, in_valid, in_ready, out_valid, out_ready, busy;
  coef_t in_data, out_data;
  logic [LOGN-1:0] out_idx, tw_addr;
  twiddle_t tw;
  twiddle_t fwd_tbl [N], inv_tbl [N];
  int checks = 0, failures = 0;

  ntt_unit #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .inverse(inverse), .cfg(cfg),
    .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data), .out_idx(out_idx),
    .tw_addr(tw_addr), .tw(tw), .busy(busy));

  assign tw = inverse ? inv_tbl[tw_addr] : fwd_tbl[tw_addr];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] psi, q;
  logic [63:0] poly [N], res [N];

  task automatic run(input logic [63:0] din [N], output logic [63:0] dout [N], output int cycles);
    int c;
    c = 0;
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      in_valid = 1; in_data = coef_t'(din[i]);
      @(negedge clk); c++;
    end
    in_valid = 0;
    while (!out_valid) begin @(negedge clk); c++; end
    for (int i = 0; i < N; i++) begin
      if (!out_valid || out_idx != LOGN'(i)) begin failures++; $display("FAIL unload order"); end
      dout[i] = 64'(out_data);
      @(negedge clk); c++;
    end
    cycles = c;
  endtask

  initial begin
    int cyc;
    logic [63:0] e, acc, ex;
    q = 64'(Q60);
    checks++;
    if (!probably_prime(q)) begin failures++; $display("FAIL modulus not prime"); end
    psi = find_psi(q, N);
    cfg = make_cfg(q, N);
    for (int k = 0; k < N; k++) begin
      fwd_tbl[k] = make_tw(q, psi, N, k, 0);
      inv_tbl[k] = make_tw(q, psi, N, k, 1);
    end
    inverse = 0; in_valid = 0; out_ready = 1; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 3; trial++) begin
      for (int i = 0; i < N; i++) poly[i] = (trial == 0) ? 64'(i == 1) : {$urandom, $urandom} % q;
      inverse = 0;
      run(poly, res, cyc);
      checks++;
      if (cyc != 2 * N + (N / 2) * LOGN) begin
        failures++; $display("FAIL forward cycles %0d expected %0d", cyc, 2 * N + (N / 2) * LOGN);
      end
      for (int j = 0; j < N; j++) begin
        ex = 64'(2 * bitrev(j, LOGN) + 1);
        acc = 0;
        for (int i = 0; i < N; i++)
          acc = addmod(acc, mulmod(poly[i], powmod(psi, (ex * 64'(i)) % 64'(2 * N), q), q), q);
        checks++;
        if (res[j] != acc) begin
          failures++;
          if (failures < 8) $display("FAIL fwd trial %0d slot %0d got %h exp %h", trial, j, res[j], acc);
        end
      end
      inverse = 1;
      run(res, res, cyc);
      checks++;
      if (cyc != 2 * N + (N / 2) * LOGN) begin failures++; $display("FAIL inverse cycles %0d", cyc); end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (res[i] != poly[i]) begin
          failures++;
          if (failures < 16) $display("FAIL inv trial %0d coef %0d got %h exp %h", trial, i, res[i], poly[i]);
        end
      end
    end
    e = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
