// tb_he_lane -- end-to-end check of one partial processing lane.
//
// For random evaluation-domain ciphertexts, weights, key-switching keys and
// Galois elements the expected aligned partial is computed here from first
// principles: element-wise products, the slot permutation of a(x) -> a(x^g),
// an O(N^2) inverse transform, base-2^dbits digits, O(N^2) forward
// transforms and the key-switching sums. Two partials are pushed back to back
// (so the second one overlaps the first inside the lane) with random output
// back-pressure, and the latency of an unstalled partial is checked against
// 4N + N*log2(N) + 3 cycles.
module tb_he_lane;
  import cheetah_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 16;
  localparam int L = 3;
  localparam int LOGN = $clog2(N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mod_cfg_t cfg;
  logic [LOGN:0] galois;
  logic in_valid, in_ready, out_valid, out_ready;
  ct_pair_t ct, out;
  coef_t w;
  logic [LOGN-1:0] ksk_idx, itw_a, ntw_a;
  coef_t ksk [2][L];
  twiddle_t itw, ntw;
  twiddle_t fwd_tbl [N], inv_tbl [N];
  logic [63:0] kk [2][2][L][N];   // [op][component][digit][slot]
  int cur_key;
  int checks = 0, failures = 0;

  he_lane #(.N(N), .L_CT(L)) dut (.clk, .rst_n, .cfg, .galois, .in_valid, .in_ready, .ct, .w,
    .ksk_idx, .ksk, .intt_tw_addr(itw_a), .intt_tw(itw), .ntt_tw_addr(ntw_a), .ntt_tw(ntw),
    .out_valid, .out_ready, .out);

  assign itw = inv_tbl[itw_a];
  assign ntw = fwd_tbl[ntw_a];
  always_comb for (int c = 0; c < 2; c++) for (int j = 0; j < L; j++) ksk[c][j] = coef_t'(kk[cur_key][c][j][ksk_idx]);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] q, psi, psi_inv, ninv;
  logic [63:0] c0 [2][N], c1 [2][N], wt [2][N], exp0 [2][N], exp1 [2][N];
  int gal [2];

  function automatic int slot_exp(int j);
    return 2 * int'(bitrev(j, LOGN)) + 1;
  endfunction

  // Direct evaluation of coefficient vector a at the slot points.
  function automatic void fwd(input logic [63:0] a [N], output logic [63:0] v [N]);
    for (int j = 0; j < N; j++) begin
      v[j] = 0;
      for (int i = 0; i < N; i++)
        v[j] = addmod(v[j], mulmod(a[i], powmod(psi, 64'((slot_exp(j) * i) % (2 * N)), q), q), q);
    end
  endfunction

  // Direct interpolation: a_i = N^-1 sum_j v_j psi^(-e_j i).
  function automatic void inv(input logic [63:0] v [N], output logic [63:0] a [N]);
    for (int i = 0; i < N; i++) begin
      a[i] = 0;
      for (int j = 0; j < N; j++)
        a[i] = addmod(a[i], mulmod(v[j], powmod(psi_inv, 64'((slot_exp(j) * i) % (2 * N)), q), q), q);
      a[i] = mulmod(a[i], ninv, q);
    end
  endfunction

  task automatic reference(int op);
    logic [63:0] p0 [N], p1 [N], s0 [N], s1 [N], a1 [N], d [N], dd [N];
    int src;
    for (int j = 0; j < N; j++) begin
      p0[j] = mulmod(c0[op][j], wt[op][j], q);
      p1[j] = mulmod(c1[op][j], wt[op][j], q);
    end
    // slot j of a(x^g) is the input slot whose exponent is e_j * g mod 2N
    for (int j = 0; j < N; j++) begin
      src = -1;
      for (int k = 0; k < N; k++) if (slot_exp(k) == (slot_exp(j) * gal[op]) % (2 * N)) src = k;
      s0[j] = p0[src]; s1[j] = p1[src];
    end
    inv(s1, a1);
    for (int j = 0; j < N; j++) begin exp0[op][j] = s0[j]; exp1[op][j] = 0; end
    for (int l = 0; l < L; l++) begin
      for (int i = 0; i < N; i++)
        d[i] = (l == L - 1) ? (a1[i] >> (20 * l)) : ((a1[i] >> (20 * l)) & 64'hfffff);
      fwd(d, dd);
      for (int j = 0; j < N; j++) begin
        exp0[op][j] = addmod(exp0[op][j], mulmod(dd[j], kk[op][0][l][j], q), q);
        exp1[op][j] = addmod(exp1[op][j], mulmod(dd[j], kk[op][1][l][j], q), q);
      end
    end
  endtask

  int first_in_cycle, first_out_cycle, cycle;
  always @(posedge clk) cycle <= cycle + 1;

  // Output checker: partial 0 then partial 1.
  initial begin
    int op, j;
    op = 0; j = 0;
    first_out_cycle = -1;
    forever begin
      @(posedge clk);
      if (rst_n && out_valid && out_ready) begin
        if (op == 0 && j == N - 1) first_out_cycle = cycle;
        checks += 2;
        if (64'(out.c0) != exp0[op][j] || 64'(out.c1) != exp1[op][j]) begin
          failures++;
          if (failures < 8) $display("FAIL op %0d slot %0d got %h/%h exp %h/%h", op, j, out.c0, out.c1, exp0[op][j], exp1[op][j]);
        end
        j++;
        if (j == N) begin j = 0; op++; end
      end
    end
  end

  initial begin
    cycle = 0;
    q = 64'(Q60);
    psi = find_psi(q, N); psi_inv = invmod(psi, q); ninv = invmod(64'(N), q);
    cfg = make_cfg(q, N);
    for (int k = 0; k < N; k++) begin
      fwd_tbl[k] = make_tw(q, psi, N, k, 0);
      inv_tbl[k] = make_tw(q, psi, N, k, 1);
    end
    gal[0] = 3; gal[1] = 2 * N - 1;
    for (int op = 0; op < 2; op++) begin
      for (int j = 0; j < N; j++) begin
        c0[op][j] = {$urandom, $urandom} % q; c1[op][j] = {$urandom, $urandom} % q;
        wt[op][j] = {$urandom, $urandom} % q;
        for (int c = 0; c < 2; c++) for (int l = 0; l < L; l++) kk[op][c][l][j] = {$urandom, $urandom} % q;
      end
      reference(op);
    end
    in_valid = 0; out_ready = 1; ct = '0; w = '0; cur_key = 0; galois = (LOGN+1)'(gal[0]);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int op = 0; op < 2; op++) begin
      for (int j = 0; j < N; j++) begin
        @(negedge clk);
        in_valid = 1; ct.c0 = coef_t'(c0[op][j]); ct.c1 = coef_t'(c1[op][j]); w = coef_t'(wt[op][j]);
        if (op == 0 && j == 0) first_in_cycle = cycle;
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
      end
      @(negedge clk); in_valid = 0;
      // keys and rotation of the next partial are switched once this one has left
      if (op == 0) galois = (LOGN+1)'(gal[1]);
      if (op == 0) fork begin wait (first_out_cycle >= 0); @(negedge clk); cur_key = 1; end join_none
    end
    checks++;
    if (first_out_cycle - first_in_cycle != 4 * N + N * LOGN + 3) begin
      failures++;
      $display("FAIL latency %0d expected %0d", first_out_cycle - first_in_cycle, 4 * N + N * LOGN + 3);
    end
    // random back-pressure for the second partial
    repeat (400) begin @(negedge clk); out_ready = ($urandom % 3) != 0; end
    out_ready = 1;
    repeat (10) @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL stray output"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
