// compose -- recombines the key-switched digits into the aligned partial (the
// "Compose" step of HERotate).
//
// For each coefficient slot it forms
//     aligned[0] = swapped_partial0 + sum_j digit_j * ksk0_j   (mod q)
//     aligned[1] =                    sum_j digit_j * ksk1_j   (mod q)
// from the swapped partial[0] stream and the 2*L_CT product streams of the
// SIMDmult units behind the lane's NTTs. All inputs are joined: a slot is
// consumed only when every input stream has it, and all are consumed in the
// same cycle. The sums are chains of compare-and-subtract modular adders.
//
// Interface: p0_valid/p0_ready/p0, prod_valid[2][L_CT]/prod_ready/prod,
// out_valid/out_ready/out (ct_pair_t). Timing: 1-cycle latency, one slot per
// cycle.
module compose
  import cheetah_pkg::*;
#(
  parameter int L_CT = 3
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mod_cfg_t cfg,
  input  logic     p0_valid,
  output logic     p0_ready,
  input  coef_t    p0,
  input  logic     prod_valid [2][L_CT],
  output logic     prod_ready,
  input  coef_t    prod [2][L_CT],
  output logic     out_valid,
  input  logic     out_ready,
  output ct_pair_t out
);

  logic     all_valid;
  logic     fire;
  ct_pair_t sum;

  always_comb begin
    all_valid = p0_valid;
    for (int c = 0; c < 2; c++)
      for (int j = 0; j < L_CT; j++) all_valid &= prod_valid[c][j];
    sum.c0 = p0;
    sum.c1 = '0;
    for (int j = 0; j < L_CT; j++) begin
      sum.c0 = mod_add(sum.c0, prod[0][j], cfg.q);
      sum.c1 = mod_add(sum.c1, prod[1][j], cfg.q);
    end
  end

  assign fire       = all_valid && (!out_valid || out_ready);
  assign p0_ready   = fire;
  assign prod_ready = fire;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else if (!out_valid || out_ready) begin
      out_valid <= all_valid;
      if (all_valid) out <= sum;
    end
  end

endmodule
