// he_lane -- partial processing lane: computes one aligned dot-product partial
// of the partial-aligned (Sched-PA) schedule.
//
// A lane takes one input ciphertext (c0, c1) and one weight plaintext w, all in
// the evaluation domain, and produces the partial product rotated into its
// output slots:
//   HEMult   : p0 = c0*w, p1 = c1*w                      (two SIMDmult units)
//   HERotate : s0 = swap(p0), s1 = swap(p1)              (Galois permutation)
//              d_j = digit_j(INTT(s1)), j < L_CT          (INTT + Decompose)
//              D_j = NTT(d_j)                             (L_CT parallel NTTs)
//              aligned0 = s0 + sum_j D_j * ksk0_j         (SIMDmult + Compose)
//              aligned1 =      sum_j D_j * ksk1_j
// Multiplying first and rotating second is the point of the schedule: the
// rotation's key-switching noise is then only added once, not multiplied.
//
// Every kernel is a valid/ready stream stage moving one coefficient per cycle,
// so the lane runs as a dataflow pipeline: while the INTT of one partial is
// busy, the input multipliers may already fill the swap buffers again. The
// key-switching key words are fetched from the PE by index (ksk_idx, returned
// combinationally), and both transform units fetch twiddles from the PE's
// shared twiddle SRAM through intt_tw_addr / ntt_tw_addr. Because all lanes of
// a PE receive identical stream timing they stay in lockstep and present the
// same twiddle addresses.
//
// Interface: in_valid/in_ready with ct (ct_pair_t) and w; galois held for the
// whole operation; out_valid/out_ready with out (aligned partial pair).
// Timing for one partial, no back-pressure: about
// 4N + N*log2(N) + small pipeline cycles from first input to last output.
// The kernel order and the split of partial[1] after the INTT follow the
// paper's lane diagram; the streaming handshakes and the key-fetch port are
// this design's choices.
module he_lane
  import cheetah_pkg::*;
#(
  parameter int N    = 4096,
  parameter int L_CT = 3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  mod_cfg_t             cfg,
  input  logic [$clog2(N):0]   galois,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  ct_pair_t             ct,
  input  coef_t                w,
  output logic [$clog2(N)-1:0] ksk_idx,
  input  coef_t                ksk [2][L_CT],
  output logic [$clog2(N)-1:0] intt_tw_addr,
  input  twiddle_t             intt_tw,
  output logic [$clog2(N)-1:0] ntt_tw_addr,
  input  twiddle_t             ntt_tw,
  output logic                 out_valid,
  input  logic                 out_ready,
  output ct_pair_t             out
);

  localparam int LOGN = $clog2(N);

  // HEMult ----------------------------------------------------------------
  logic  m_in_ready [2];
  logic  m_out_valid [2];
  logic  m_out_ready [2];
  coef_t m_out [2];

  assign in_ready = m_in_ready[0] && m_in_ready[1];

  for (genvar c = 0; c < 2; c++) begin : g_hemult
    simd_mult u_mult (
      .clk, .rst_n, .cfg,
      .in_valid  (in_valid && m_in_ready[1-c]),
      .in_ready  (m_in_ready[c]),
      .a         (c == 0 ? ct.c0 : ct.c1),
      .b         (w),
      .out_valid (m_out_valid[c]),
      .out_ready (m_out_ready[c]),
      .r         (m_out[c])
    );
  end

  // Swap ------------------------------------------------------------------
  logic  s_out_valid [2];
  logic  s_out_ready [2];
  coef_t s_out [2];

  for (genvar c = 0; c < 2; c++) begin : g_swap
    swap #(.N(N)) u_swap (
      .clk, .rst_n, .galois,
      .in_valid  (m_out_valid[c]),
      .in_ready  (m_out_ready[c]),
      .in_data   (m_out[c]),
      .out_valid (s_out_valid[c]),
      .out_ready (s_out_ready[c]),
      .out_data  (s_out[c])
    );
  end

  // INTT of swapped partial[1] ----------------------------------------------
  logic  it_out_valid, it_out_ready, it_busy;
  coef_t it_out;
  logic [LOGN-1:0] it_idx;

  ntt_unit #(.N(N)) u_intt (
    .clk, .rst_n, .inverse(1'b1), .cfg,
    .in_valid  (s_out_valid[1]),
    .in_ready  (s_out_ready[1]),
    .in_data   (s_out[1]),
    .out_valid (it_out_valid),
    .out_ready (it_out_ready),
    .out_data  (it_out),
    .out_idx   (it_idx),
    .tw_addr   (intt_tw_addr),
    .tw        (intt_tw),
    .busy      (it_busy)
  );

  // Decompose ---------------------------------------------------------------
  logic  dc_out_valid, dc_out_ready;
  coef_t dc_digit [L_CT];

  decompose #(.L_CT(L_CT)) u_dcmp (
    .clk, .rst_n, .cfg,
    .in_valid  (it_out_valid),
    .in_ready  (it_out_ready),
    .in_data   (it_out),
    .out_valid (dc_out_valid),
    .out_ready (dc_out_ready),
    .out_digit (dc_digit)
  );

  // NTTs of the digits, lockstep -------------------------------------------
  logic  nt_in_ready [L_CT];
  logic  nt_out_valid [L_CT];
  logic  nt_out_ready [L_CT];
  coef_t nt_out [L_CT];
  logic [LOGN-1:0] nt_idx [L_CT];
  logic [LOGN-1:0] nt_tw_addr [L_CT];
  logic  nt_busy [L_CT];
  logic  nt_all_in_ready;

  always_comb begin
    nt_all_in_ready = 1'b1;
    for (int j = 0; j < L_CT; j++) nt_all_in_ready &= nt_in_ready[j];
  end
  assign dc_out_ready = nt_all_in_ready;

  for (genvar j = 0; j < L_CT; j++) begin : g_ntt
    ntt_unit #(.N(N)) u_ntt (
      .clk, .rst_n, .inverse(1'b0), .cfg,
      .in_valid  (dc_out_valid && nt_all_in_ready),
      .in_ready  (nt_in_ready[j]),
      .in_data   (dc_digit[j]),
      .out_valid (nt_out_valid[j]),
      .out_ready (nt_out_ready[j]),
      .out_data  (nt_out[j]),
      .out_idx   (nt_idx[j]),
      .tw_addr   (nt_tw_addr[j]),
      .tw        (ntt_tw),
      .busy      (nt_busy[j])
    );
  end

  assign ntt_tw_addr = nt_tw_addr[0];
  assign ksk_idx     = nt_idx[0];

  // Key-switching products -------------------------------------------------
  logic  k_in_ready [2][L_CT];
  logic  k_out_valid [2][L_CT];
  coef_t k_out [2][L_CT];
  logic  cp_prod_ready;

  for (genvar j = 0; j < L_CT; j++) begin : g_ks
    assign nt_out_ready[j] = k_in_ready[0][j] && k_in_ready[1][j];
    for (genvar c = 0; c < 2; c++) begin : g_c
      simd_mult u_kmul (
        .clk, .rst_n, .cfg,
        .in_valid  (nt_out_valid[j] && k_in_ready[1-c][j]),
        .in_ready  (k_in_ready[c][j]),
        .a         (nt_out[j]),
        .b         (ksk[c][j]),
        .out_valid (k_out_valid[c][j]),
        .out_ready (cp_prod_ready),
        .r         (k_out[c][j])
      );
    end
  end

  // Compose -----------------------------------------------------------------
  compose #(.L_CT(L_CT)) u_comp (
    .clk, .rst_n, .cfg,
    .p0_valid   (s_out_valid[0]),
    .p0_ready   (s_out_ready[0]),
    .p0         (s_out[0]),
    .prod_valid (k_out_valid),
    .prod_ready (cp_prod_ready),
    .prod       (k_out),
    .out_valid,
    .out_ready,
    .out
  );

  // The digit NTTs are fed together and must stay in step.
  for (genvar j = 1; j < L_CT; j++) begin : g_lockstep
    a_ntt_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                      nt_out_valid[j] == nt_out_valid[0] && nt_busy[j] == nt_busy[0]);
  end

endmodule
