// tb_swap -- checks the evaluation-domain slot permutation against the
// automorphism a(x) -> a(x^g) done in the coefficient domain: for random
// polynomials a and Galois elements g = 3^r mod 2N (and g = 2N-1), the unit is
// fed the evaluations of a and must return the evaluations of a(x^g), each
// computed directly at psi^(2*bitrev(j)+1). Also checks the N + N cycle timing.
module tb_swap;
  import cheetah_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 32;
  localparam int LOGN = $clog2(N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [LOGN:0] galois;
  logic in_valid, in_ready, out_valid, out_ready;
  coef_t in_data, out_data;
  int checks = 0, failures = 0;

  swap #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .galois(galois), .in_valid(in_valid), .in_ready(in_ready),
    .in_data(in_data), .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] q, psi;

  function automatic void evaluate(input logic [63:0] a [N], output logic [63:0] v [N]);
    logic [63:0] acc, ex;
    for (int j = 0; j < N; j++) begin
      ex = 64'(2 * bitrev(j, LOGN) + 1);
      acc = 0;
      for (int i = 0; i < N; i++)
        acc = addmod(acc, mulmod(a[i], powmod(psi, (ex * 64'(i)) % 64'(2 * N), q), q), q);
      v[j] = acc;
    end
  endfunction

  initial begin
    logic [63:0] a [N], ag [N], va [N], vg [N];
    int g, idx, cyc;
    q = 64'(Q60);
    psi = find_psi(q, N);
    in_valid = 0; out_ready = 1; in_data = 0; galois = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 6; trial++) begin
      g = (trial == 5) ? 2 * N - 1 : int'(powmod(3, 64'(trial), 64'(2 * N)));
      for (int i = 0; i < N; i++) a[i] = {$urandom, $urandom} % q;
      // a(x^g) with x^N = -1.
      for (int i = 0; i < N; i++) ag[i] = 0;
      for (int i = 0; i < N; i++) begin
        idx = (i * g) % (2 * N);
        if (idx < N) ag[idx] = a[i];
        else         ag[idx - N] = (a[i] == 0) ? 0 : q - a[i];
      end
      evaluate(a, va);
      evaluate(ag, vg);
      galois = (LOGN+1)'(g);
      cyc = 0;
      @(negedge clk);
      for (int j = 0; j < N; j++) begin
        in_valid = 1; in_data = coef_t'(va[j]);
        @(negedge clk); cyc++;
      end
      in_valid = 0;
      for (int j = 0; j < N; j++) begin
        out_ready = (j % 5) != 3;
        while (!(out_valid && out_ready)) begin
          @(negedge clk); cyc++; out_ready = 1;
        end
        checks++;
        if (64'(out_data) != vg[j]) begin
          failures++;
          if (failures < 8) $display("FAIL g=%0d slot %0d got %h exp %h", g, j, out_data, vg[j]);
        end
        @(negedge clk); cyc++;
      end
      out_ready = 1;
      checks++;
      if (cyc != 2 * N + N / 5) begin failures++; $display("FAIL cycles %0d", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
