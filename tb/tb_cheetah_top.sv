// tb_cheetah_top -- end-to-end run of the accelerator at reduced size
// (2 PEs x 4 lanes, N = 16) through the host command stream only.
//
// The host broadcasts the modulus settings, twiddle tables, four input
// ciphertexts and four key-switching key sets to both PEs, then gives each PE
// its own weights and lane settings: PE0 computes an output ciphertext from
// five partials in two passes (the second pass accumulates), PE1 from four
// partials in one pass with all lanes busy. Results are read back through the
// output queue under random back-pressure and compared with reference
// partials computed directly in the testbench.
// Mechanisms counted (each must occur): broadcast commands, dispatcher stalls
// on a busy PE, accumulating passes, masked-off lanes, both PEs busy at once,
// host back-pressure from a full input buffer, read-back waits.
module tb_cheetah_top;
  import cheetah_pkg::*;
  import tb_ref_pkg::*;

  localparam int NUM_PE = 2, N = 16, LANES = 4, L = 3, IN_CTS = 4, KEYS = 4, FD = 16;
  localparam int LOGN = $clog2(N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic host_in_valid, host_in_ready, host_out_valid, host_out_ready;
  host_cmd_t host_in;
  logic [63:0] host_out;
  logic [NUM_PE-1:0] pe_busy;
  int checks = 0, failures = 0;

  cheetah_top #(.NUM_PE(NUM_PE), .N(N), .LANES(LANES), .L_CT(L), .IN_CTS(IN_CTS), .KEYS(KEYS),
                .FIFO_DEPTH(FD)) dut (
    .clk, .rst_n, .host_in_valid, .host_in_ready, .host_in,
    .host_out_valid, .host_out_ready, .host_out, .pe_busy);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mechanism counters.
  int n_broadcast = 0, n_stall = 0, n_accum = 0, n_masked = 0, n_both_busy = 0, n_backpressure = 0, n_read_wait = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.cmd_pop && $countones(dut.target) > 1) n_broadcast++;
    if (dut.cmd_valid && !dut.cmd_pop && !dut.is_read && dut.target_busy) n_stall++;
    if (dut.cmd_valid && !dut.cmd_pop && dut.is_read) n_read_wait++;
    if (dut.cmd_pop && dut.cmd.op == CMD_START && !dut.cmd.sel) n_accum++;
    if (&pe_busy) n_both_busy++;
    if (host_in_valid && !host_in_ready) n_backpressure++;
  end

  // Host result sink with random back-pressure.
  logic [63:0] results [$];
  always @(posedge clk) if (rst_n && host_out_valid && host_out_ready) results.push_back(host_out);
  always @(negedge clk) host_out_ready = ($urandom % 3) != 0;

  task automatic send(int mask, cmd_op_e op, int a, int b, bit s, bit s2, int addr, logic [63:0] data);
    @(negedge clk);
    host_in_valid = 1;
    host_in = '0; host_in.op = op; host_in.pe_mask = 16'(mask); host_in.idx_a = 16'(a); host_in.idx_b = 8'(b);
    host_in.sel = s; host_in.sel2 = s2; host_in.addr = 16'(addr); host_in.data = data;
    @(posedge clk);
    while (!host_in_ready) @(posedge clk);
    @(negedge clk);
    host_in_valid = 0;
  endtask

  logic [63:0] q, psi;
  poly_t cts0 [IN_CTS], cts1 [IN_CTS];
  poly_t keys0 [KEYS][], keys1 [KEYS][];
  poly_t acc0 [NUM_PE], acc1 [NUM_PE];

  task automatic program_pass(int pe, int nlanes, int ct_of [LANES], int key_of [LANES], int gal_of [LANES], bit first);
    poly_t w, o0, o1;
    lane_cfg_t lc;
    w = new[N];
    if (nlanes < LANES) n_masked++;
    for (int l = 0; l < LANES; l++) begin
      for (int i = 0; i < N; i++) begin
        w[i] = {$urandom, $urandom} % q;
        send(1 << pe, CMD_WEIGHT, l, 0, 0, 0, i, w[i]);
      end
      lc.active = (l < nlanes); lc.galois = 16'(gal_of[l]); lc.key_sel = 8'(key_of[l]); lc.ct_sel = 16'(ct_of[l]);
      send(1 << pe, CMD_LANE_CFG, l, 0, 0, 0, 0, 64'(lc));
      if (l < nlanes) begin
        ref_partial(cts0[ct_of[l]], cts1[ct_of[l]], w, gal_of[l], keys0[key_of[l]], keys1[key_of[l]], 20, q, psi, o0, o1);
        for (int i = 0; i < N; i++) begin
          acc0[pe][i] = (first && l == 0) ? o0[i] : addmod(acc0[pe][i], o0[i], q);
          acc1[pe][i] = (first && l == 0) ? o1[i] : addmod(acc1[pe][i], o1[i], q);
        end
      end
    end
  endtask

  initial begin
    mod_cfg_t c;
    int ct_of [LANES], key_of [LANES], gal_of [LANES];
    int all = (1 << NUM_PE) - 1;
    q = 64'(Q60); psi = find_psi(q, N);
    c = make_cfg(q, N);
    host_in_valid = 0; host_in = '0;
    for (int p = 0; p < NUM_PE; p++) begin acc0[p] = new[N]; acc1[p] = new[N]; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    send(all, CMD_MOD_CFG, 0, 0, 0, 0, CFG_Q, 64'(c.q));
    send(all, CMD_MOD_CFG, 0, 0, 0, 0, CFG_MU, 64'(c.mu));
    send(all, CMD_MOD_CFG, 0, 0, 0, 0, CFG_K, 64'(c.k));
    send(all, CMD_MOD_CFG, 0, 0, 0, 0, CFG_NINV, 64'(c.n_inv));
    send(all, CMD_MOD_CFG, 0, 0, 0, 0, CFG_NINVS, 64'(c.n_inv_s));
    send(all, CMD_MOD_CFG, 0, 0, 0, 0, CFG_DBITS, 64'd20);
    for (int k = 0; k < N; k++) begin
      twiddle_t t;
      t = make_tw(q, psi, N, k, 0);
      send(all, CMD_TWIDDLE, 0, 0, 0, 0, k, 64'(t.w)); send(all, CMD_TWIDDLE, 0, 0, 0, 1, k, t.ws);
      t = make_tw(q, psi, N, k, 1);
      send(all, CMD_TWIDDLE, 0, 0, 1, 0, k, 64'(t.w)); send(all, CMD_TWIDDLE, 0, 0, 1, 1, k, t.ws);
    end
    for (int ci = 0; ci < IN_CTS; ci++) begin
      cts0[ci] = new[N]; cts1[ci] = new[N];
      for (int i = 0; i < N; i++) begin
        cts0[ci][i] = {$urandom, $urandom} % q; cts1[ci][i] = {$urandom, $urandom} % q;
        send(all, CMD_INPUT_CT, ci, 0, 0, 0, i, cts0[ci][i]);
        send(all, CMD_INPUT_CT, ci, 0, 1, 0, i, cts1[ci][i]);
      end
    end
    for (int k = 0; k < KEYS; k++) begin
      keys0[k] = new[L]; keys1[k] = new[L];
      for (int l = 0; l < L; l++) begin
        keys0[k][l] = new[N]; keys1[k][l] = new[N];
        for (int i = 0; i < N; i++) begin
          keys0[k][l][i] = {$urandom, $urandom} % q; keys1[k][l][i] = {$urandom, $urandom} % q;
          send(all, CMD_KEY, k, l, 0, 0, i, keys0[k][l][i]);
          send(all, CMD_KEY, k, l, 1, 0, i, keys1[k][l][i]);
        end
      end
    end
    ct_of = '{0, 1, 2, 3}; key_of = '{0, 1, 2, 3}; gal_of = '{1, 3, 9, 2 * N - 1};
    program_pass(0, 3, ct_of, key_of, gal_of, 1);
    ct_of = '{3, 2, 1, 0}; key_of = '{1, 1, 0, 2}; gal_of = '{3, 3, 1, 9};
    program_pass(1, 4, ct_of, key_of, gal_of, 1);
    send(1, CMD_START, 0, 0, 1, 0, 0, 0);
    send(2, CMD_START, 0, 0, 1, 0, 0, 0);
    ct_of = '{3, 0, 1, 2}; key_of = '{3, 2, 1, 0}; gal_of = '{27, 5, 9, 3};
    program_pass(0, 2, ct_of, key_of, gal_of, 0);   // waits for PE0's first pass
    send(1, CMD_START, 0, 0, 0, 0, 0, 0);
    for (int p = 0; p < NUM_PE; p++)
      for (int s = 0; s < 2; s++)
        for (int i = 0; i < N; i++) send(1 << p, CMD_READ_OUT, 0, 0, s[0], 0, i, 0);
    while (results.size() < NUM_PE * 2 * N) @(posedge clk);
    for (int p = 0; p < NUM_PE; p++)
      for (int s = 0; s < 2; s++)
        for (int i = 0; i < N; i++) begin
          logic [63:0] got, ex;
          got = results.pop_front();
          ex = (s == 0) ? acc0[p][i] : acc1[p][i];
          checks++;
          if (got != ex) begin
            failures++;
            if (failures < 8) $display("FAIL pe %0d poly %0d slot %0d got %h exp %h", p, s, i, got, ex);
          end
        end
    $display("mechanisms: broadcast=%0d stall=%0d accumulate=%0d masked=%0d both_busy=%0d backpressure=%0d read_wait=%0d",
             n_broadcast, n_stall, n_accum, n_masked, n_both_busy, n_backpressure, n_read_wait);
    checks += 7;
    if (n_broadcast == 0) begin failures++; $display("FAIL no broadcast"); end
    if (n_stall == 0) begin failures++; $display("FAIL no busy stall"); end
    if (n_accum == 0) begin failures++; $display("FAIL no accumulating pass"); end
    if (n_masked == 0) begin failures++; $display("FAIL no masked lane"); end
    if (n_both_busy == 0) begin failures++; $display("FAIL PEs never concurrent"); end
    if (n_backpressure == 0) begin failures++; $display("FAIL no host back-pressure"); end
    if (n_read_wait == 0) begin failures++; $display("FAIL no read wait"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
