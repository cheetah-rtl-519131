// he_pe -- ciphertext processing engine (PE): computes one output ciphertext
// of a layer, output-stationary.
//
// A PE owns everything one output ciphertext needs:
//   * Input CT SRAM   : IN_CTS input ciphertexts (both polynomials), a full
//                       copy of the layer's activations; one read port per lane.
//   * Weight SRAM     : one plaintext weight polynomial per lane for the pass.
//   * key SRAM        : KEYS key-switching key sets (2 x L_CT polynomials each).
//   * twiddle SRAM    : forward and inverse NTT tables, shared by all lanes.
//   * LANES partial processing lanes (he_lane), fed in lockstep.
//   * the partial reduction network (partial_reduction).
//   * Output CT SRAM  : the accumulated output ciphertext (2 x N words).
// A pass streams slot i of every lane's input ciphertext and weight into the
// lanes, i = 0..N-1; the lanes return aligned partials, the reduction network
// sums the active lanes and the sum is written to (first pass) or added into
// (later passes) the Output CT SRAM. When a dot product has more partials than
// there are lanes, the host runs several passes on the same output ciphertext:
// this is the time multiplexing of partials onto lanes.
//
// Host side: cmd_valid with a host_cmd_t writes configuration and memories or
// starts a pass (see cheetah_pkg); commands must not arrive while busy.
// rd_sel/rd_addr read the Output CT SRAM, data valid one cycle later.
// Timing of a pass: N feed cycles overlap the lane pipeline; the last output
// slot is written about 4N + N*log2(N) + 5 cycles after start.
// The memory set, the lane/reduction/output structure and output-stationary
// operation follow the paper; the key SRAM (the paper does not say where
// rotation keys live), the command set and the per-lane read ports are this
// design's choices.
module he_pe
  import cheetah_pkg::*;
#(
  parameter int N      = 4096,
  parameter int LANES  = 512,
  parameter int L_CT   = 3,
  parameter int IN_CTS = 256,
  parameter int KEYS   = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cmd_valid,
  input  host_cmd_t            cmd,
  output logic                 busy,
  output logic                 done,
  input  logic                 rd_sel,
  input  logic [$clog2(N)-1:0] rd_addr,
  output coef_t                rd_data
);

  localparam int LOGN = $clog2(N);
  localparam int CW   = (IN_CTS > 1) ? $clog2(IN_CTS) : 1;
  localparam int KW   = (KEYS > 1) ? $clog2(KEYS) : 1;
  localparam int LW   = (LANES > 1) ? $clog2(LANES) : 1;
  localparam int DW   = (L_CT > 1) ? $clog2(L_CT) : 1;

  typedef enum logic [1:0] {P_IDLE, P_RUN} pstate_e;

  // Memories ----------------------------------------------------------------
  mod_cfg_t  cfg;
  twiddle_t  tw_fwd [N];
  twiddle_t  tw_inv [N];
  coef_t     in_ct0 [IN_CTS][N];
  coef_t     in_ct1 [IN_CTS][N];
  coef_t     weight [LANES][N];
  coef_t     key_mem [KEYS][2][L_CT][N];
  coef_t     out_ct0 [N];
  coef_t     out_ct1 [N];
  lane_cfg_t lane_cfg [LANES];

  // Pass control ------------------------------------------------------------
  pstate_e         state;
  logic            first_pass;
  logic [LOGN-1:0] feed_cnt;
  logic            feeding;
  logic [LOGN-1:0] acc_cnt;

  // Lanes -------------------------------------------------------------------
  logic            l_in_ready [LANES];
  logic            all_in_ready;
  logic [LOGN-1:0] l_ksk_idx [LANES];
  coef_t           l_ksk [LANES][2][L_CT];
  logic [LOGN-1:0] l_itw_addr [LANES];
  logic [LOGN-1:0] l_ntw_addr [LANES];
  twiddle_t        itw, ntw;
  logic            l_out_valid [LANES];
  ct_pair_t        l_out [LANES];
  logic            l_mask [LANES];
  logic            red_in_ready;
  logic            red_valid;
  ct_pair_t        red_out;

  always_comb begin
    all_in_ready = 1'b1;
    for (int l = 0; l < LANES; l++) all_in_ready &= l_in_ready[l];
  end

  // The lanes run in lockstep, so lane 0's twiddle addresses serve all.
  assign itw = tw_inv[l_itw_addr[0]];
  assign ntw = tw_fwd[l_ntw_addr[0]];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    ct_pair_t ct_l;
    always_comb begin
      ct_l.c0 = in_ct0[CW'(lane_cfg[l].ct_sel)][feed_cnt];
      ct_l.c1 = in_ct1[CW'(lane_cfg[l].ct_sel)][feed_cnt];
      for (int c = 0; c < 2; c++)
        for (int j = 0; j < L_CT; j++)
          l_ksk[l][c][j] = key_mem[KW'(lane_cfg[l].key_sel)][c][j][l_ksk_idx[l]];
    end
    assign l_mask[l] = lane_cfg[l].active;

    he_lane #(.N(N), .L_CT(L_CT)) u_lane (
      .clk, .rst_n, .cfg,
      .galois       (lane_cfg[l].galois[LOGN:0]),
      .in_valid     (feeding && all_in_ready),
      .in_ready     (l_in_ready[l]),
      .ct           (ct_l),
      .w            (weight[l][feed_cnt]),
      .ksk_idx      (l_ksk_idx[l]),
      .ksk          (l_ksk[l]),
      .intt_tw_addr (l_itw_addr[l]),
      .intt_tw      (itw),
      .ntt_tw_addr  (l_ntw_addr[l]),
      .ntt_tw       (ntw),
      .out_valid    (l_out_valid[l]),
      .out_ready    (red_in_ready),
      .out          (l_out[l])
    );

    if (l > 0) begin : g_chk
      a_tw_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                       l_itw_addr[l] == l_itw_addr[0] && l_ntw_addr[l] == l_ntw_addr[0]);
    end
  end

  partial_reduction #(.LANES(LANES)) u_red (
    .clk, .rst_n,
    .q         (cfg.q),
    .lane_mask (l_mask),
    .in_valid  (l_out_valid),
    .in_ready  (red_in_ready),
    .in        (l_out),
    .out_valid (red_valid),
    .out_ready (1'b1),
    .out       (red_out)
  );

  assign busy = (state != P_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= P_IDLE;
      first_pass <= 1'b0;
      feed_cnt   <= '0;
      feeding    <= 1'b0;
      acc_cnt    <= '0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        P_IDLE: if (cmd_valid && cmd.op == CMD_START) begin
          state      <= P_RUN;
          first_pass <= cmd.sel;
          feeding    <= 1'b1;
          feed_cnt   <= '0;
          acc_cnt    <= '0;
        end
        P_RUN: begin
          if (feeding && all_in_ready) begin
            feed_cnt <= feed_cnt + 1'b1;
            if (feed_cnt == LOGN'(N-1)) feeding <= 1'b0;
          end
          if (red_valid) begin
            acc_cnt <= acc_cnt + 1'b1;
            if (acc_cnt == LOGN'(N-1)) begin
              state <= P_IDLE;
              done  <= 1'b1;
            end
          end
        end
        default: state <= P_IDLE;
      endcase
    end
  end

  // Host writes, accumulation and output reads.
  always_ff @(posedge clk) begin
    if (cmd_valid && state == P_IDLE) begin
      unique case (cmd.op)
        CMD_MOD_CFG: unique case (cmd.addr)
          CFG_Q:     cfg.q       <= coef_t'(cmd.data);
          CFG_MU:    cfg.mu      <= (COEF_W+1)'(cmd.data);
          CFG_K:     cfg.k       <= 7'(cmd.data);
          CFG_NINV:  cfg.n_inv   <= coef_t'(cmd.data);
          CFG_NINVS: cfg.n_inv_s <= cmd.data;
          CFG_DBITS: cfg.dbits   <= 7'(cmd.data);
          default: ;
        endcase
        CMD_TWIDDLE: begin
          if (!cmd.sel && !cmd.sel2) tw_fwd[LOGN'(cmd.addr)].w  <= coef_t'(cmd.data);
          if (!cmd.sel &&  cmd.sel2) tw_fwd[LOGN'(cmd.addr)].ws <= cmd.data;
          if ( cmd.sel && !cmd.sel2) tw_inv[LOGN'(cmd.addr)].w  <= coef_t'(cmd.data);
          if ( cmd.sel &&  cmd.sel2) tw_inv[LOGN'(cmd.addr)].ws <= cmd.data;
        end
        CMD_INPUT_CT: if (int'(cmd.idx_a) < IN_CTS) begin
          if (!cmd.sel) in_ct0[CW'(cmd.idx_a)][LOGN'(cmd.addr)] <= coef_t'(cmd.data);
          else          in_ct1[CW'(cmd.idx_a)][LOGN'(cmd.addr)] <= coef_t'(cmd.data);
        end
        CMD_WEIGHT: if (int'(cmd.idx_a) < LANES)
          weight[LW'(cmd.idx_a)][LOGN'(cmd.addr)] <= coef_t'(cmd.data);
        CMD_KEY: if (int'(cmd.idx_a) < KEYS && int'(cmd.idx_b) < L_CT)
          key_mem[KW'(cmd.idx_a)][cmd.sel][DW'(cmd.idx_b)][LOGN'(cmd.addr)] <= coef_t'(cmd.data);
        CMD_LANE_CFG: if (int'(cmd.idx_a) < LANES)
          lane_cfg[LW'(cmd.idx_a)] <= lane_cfg_t'(cmd.data[$bits(lane_cfg_t)-1:0]);
        default: ;
      endcase
    end
    if (state == P_RUN && red_valid) begin
      out_ct0[acc_cnt] <= first_pass ? red_out.c0 : mod_add(out_ct0[acc_cnt], red_out.c0, cfg.q);
      out_ct1[acc_cnt] <= first_pass ? red_out.c1 : mod_add(out_ct1[acc_cnt], red_out.c1, cfg.q);
    end
    rd_data <= rd_sel ? out_ct1[rd_addr] : out_ct0[rd_addr];
  end

  a_no_cmd_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
                        cmd_valid |-> !busy);

endmodule
