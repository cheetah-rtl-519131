// tb_he_pe -- one processing engine computing an output ciphertext from five
// partials in two passes: pass 1 uses three of the four lanes (the fourth is
// masked off), pass 2 accumulates two more partials into the Output CT SRAM.
// Memories and configuration are written through the command port, the result
// is read back through the read port and compared with the sum of reference
// partials computed directly in the testbench. Pass latency is checked.
module tb_he_pe;
  import cheetah_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 16, LANES = 4, L = 3, IN_CTS = 4, KEYS = 4;
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
    repeat (100000) @(posedge clk);
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
    // pass 1: three partials, lane 3 idle
    ct_of = '{0, 1, 2, 3}; key_of = '{0, 1, 2, 3}; gal_of = '{1, 3, 9, 2 * N - 1};
    run_pass(3, ct_of, key_of, gal_of, 1, cyc);
    checks++;
    if (cyc != 4 * N + N * LOGN + 6) begin failures++; $display("FAIL pass cycles %0d exp %0d", cyc, 4 * N + N * LOGN + 6); end
    // pass 2: two more partials accumulated
    ct_of = '{3, 0, 1, 2}; key_of = '{3, 2, 1, 0}; gal_of = '{27, 5, 9, 3};
    run_pass(2, ct_of, key_of, gal_of, 0, cyc);
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
