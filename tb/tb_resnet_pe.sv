// tb_resnet_pe -- one processing engine at the ring size of the ResNet50
// example layer (n = 4096, 3x3 filter, 64x64 activations, one channel per
// ciphertext), computing part of one output ciphertext.
//
// The lane count is cut to 3 (the built PE has 512) so that the reference
// model, which evaluates and interpolates every polynomial directly in
// O(n^2), stays within a few minutes. The rotations are the ones a 3x3 filter
// on a 64-wide image needs: slot shifts of 1, 63, 64 and 65, i.e. Galois
// elements 3^r mod 2n. Pass 1 runs three partials, pass 2 accumulates two
// more with the third lane masked off. The output ciphertext is read back and
// compared with the sum of the reference partials; both pass latencies are
// checked against 4n + n*log2(n) + 6 cycles.
module tb_resnet_pe;
  import cheetah_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 4096, LANES = 3, L = 3, IN_CTS = 2, KEYS = 2;
  localparam int LOGN = $clog2(N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, busy, done, rd_sel;
  host_cmd_t cmd;
  logic [LOGN-1:0] rd_addr;
  coef_t rd_data;
  int checks = 0, failures = 0;

  he_pe #(.N(N), .LANES(LANES), .L_CT(L), .IN_CTS(IN_CTS), .KEYS(KEYS)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .busy, .done, .rd_sel, .rd_addr, .rd_data);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(cmd_op_e op, int a, int b, bit s, bit s2, int addr, logic [63:0] data);
    @(negedge clk);
    cmd_valid = 1;
    cmd = '0; cmd.op = op; cmd.idx_a = 16'(a); cmd.idx_b = 8'(b); cmd.sel = s; cmd.sel2 = s2;
    cmd.addr = 16'(addr); cmd.data = data;
    @(negedge clk);
    cmd_valid = 0;
  endtask

  logic [63:0] q, psi;
  poly_t cts0 [IN_CTS], cts1 [IN_CTS];
  poly_t keys0 [KEYS][], keys1 [KEYS][];
  poly_t acc0, acc1;

  task automatic run_pass(input int nlanes, input int ct_of [LANES], input int key_of [LANES],
                          input int gal_of [LANES], input bit first, output int cycles);
    poly_t w, o0, o1;
    lane_cfg_t lc;
    w = new[N];
    for (int l = 0; l < LANES; l++) begin
      for (int i = 0; i < N; i++) begin
        w[i] = {$urandom, $urandom} % q;
        send(CMD_WEIGHT, l, 0, 0, 0, i, w[i]);
      end
      lc.active = (l < nlanes); lc.galois = 16'(gal_of[l]); lc.key_sel = 8'(key_of[l]); lc.ct_sel = 16'(ct_of[l]);
      send(CMD_LANE_CFG, l, 0, 0, 0, 0, 64'(lc));
      if (l < nlanes) begin
        ref_partial(cts0[ct_of[l]], cts1[ct_of[l]], w, gal_of[l], keys0[key_of[l]], keys1[key_of[l]], 20, q, psi, o0, o1);
        for (int i = 0; i < N; i++) begin
          acc0[i] = first && l == 0 ? o0[i] : addmod(acc0[i], o0[i], q);
          acc1[i] = first && l == 0 ? o1[i] : addmod(acc1[i], o1[i], q);
        end
      end
    end
    send(CMD_START, 0, 0, first, 0, 0, 0);
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    mod_cfg_t c;
    int cyc;
    int ct_of [LANES], key_of [LANES], gal_of [LANES];
    q = 64'(Q60); psi = find_psi(q, N);
    c = make_cfg(q, N);
    cmd_valid = 0; cmd = '0; rd_sel = 0; rd_addr = 0;
    acc0 = new[N]; acc1 = new[N];
    repeat (3) @(posedge clk);
    rst_n = 1;
    send(CMD_MOD_CFG, 0, 0, 0, 0, CFG_Q, 64'(c.q));
    send(CMD_MOD_CFG, 0, 0, 0, 0, CFG_MU, 64'(c.mu));
    send(CMD_MOD_CFG, 0, 0, 0, 0, CFG_K, 64'(c.k));
    send(CMD_MOD_CFG, 0, 0, 0, 0, CFG_NINV, 64'(c.n_inv));
    send(CMD_MOD_CFG, 0, 0, 0, 0, CFG_NINVS, 64'(c.n_inv_s));
    send(CMD_MOD_CFG, 0, 0, 0, 0, CFG_DBITS, 64'd20);
    for (int k = 0; k < N; k++) begin
      twiddle_t t;
      t = make_tw(q, psi, N, k, 0);
      send(CMD_TWIDDLE, 0, 0, 0, 0, k, 64'(t.w)); send(CMD_TWIDDLE, 0, 0, 0, 1, k, t.ws);
      t = make_tw(q, psi, N, k, 1);
      send(CMD_TWIDDLE, 0, 0, 1, 0, k, 64'(t.w)); send(CMD_TWIDDLE, 0, 0, 1, 1, k, t.ws);
    end
    for (int ci = 0; ci < IN_CTS; ci++) begin
      cts0[ci] = new[N]; cts1[ci] = new[N];
      for (int i = 0; i < N; i++) begin
        cts0[ci][i] = {$urandom, $urandom} % q; cts1[ci][i] = {$urandom, $urandom} % q;
        send(CMD_INPUT_CT, ci, 0, 0, 0, i, cts0[ci][i]);
        send(CMD_INPUT_CT, ci, 0, 1, 0, i, cts1[ci][i]);
      end
    end
    for (int k = 0; k < KEYS; k++) begin
      keys0[k] = new[L]; keys1[k] = new[L];
      for (int l = 0; l < L; l++) begin
        keys0[k][l] = new[N]; keys1[k][l] = new[N];
        for (int i = 0; i < N; i++) begin
          keys0[k][l][i] = {$urandom, $urandom} % q; keys1[k][l][i] = {$urandom, $urandom} % q;
          send(CMD_KEY, k, l, 0, 0, i, keys0[k][l][i]);
          send(CMD_KEY, k, l, 1, 0, i, keys1[k][l][i]);
        end
      end
    end
    // pass 1: shifts by 1, 64 and 65 slots
    ct_of = '{0, 1, 0}; key_of = '{0, 1, 1};
    gal_of = '{int'(powmod(3, 1, 2 * N)), int'(powmod(3, 64, 2 * N)), int'(powmod(3, 65, 2 * N))};
    run_pass(3, ct_of, key_of, gal_of, 1, cyc);
    checks++;
    if (cyc != 4 * N + N * LOGN + 6) begin failures++; $display("FAIL pass 1 cycles %0d exp %0d", cyc, 4 * N + N * LOGN + 6); end
    // pass 2: shifts by 63 and by -1 (3^(n/2-1)), lane 2 masked off
    ct_of = '{1, 0, 1}; key_of = '{1, 0, 0};
    gal_of = '{int'(powmod(3, 63, 2 * N)), int'(powmod(3, N / 2 - 1, 2 * N)), 1};
    run_pass(2, ct_of, key_of, gal_of, 0, cyc);
    checks++;
    if (cyc != 4 * N + N * LOGN + 6) begin failures++; $display("FAIL pass 2 cycles %0d exp %0d", cyc, 4 * N + N * LOGN + 6); end
    for (int i = 0; i < N; i++) begin
      for (int s = 0; s < 2; s++) begin
        @(negedge clk); rd_sel = s[0]; rd_addr = LOGN'(i);
        @(negedge clk);
        checks++;
        if (64'(rd_data) != (s == 0 ? acc0[i] : acc1[i])) begin
          failures++;
          if (failures < 8) $display("FAIL out[%0d][%0d] got %h exp %h", s, i, rd_data, s == 0 ? acc0[i] : acc1[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
