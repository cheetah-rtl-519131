// partial_reduction -- the partial reduction network of a PE: a tree of SIMDadd
// (modular adder) units that sums the aligned partials of all lanes.
//
// Every lane delivers one aligned partial pair (two polynomials) per slot, in
// lockstep with the others. The network adds the pairs of all lanes enabled in
// lane_mask, slot by slot, with a binary tree of compare-and-subtract modular
// adders (HEAdd); lanes that carry no partial in this pass are masked to zero.
// LANES need not be a power of two: the tree is padded with zeros.
//
// Interface: in_valid[LANES]/in_ready (one ready for all lanes), in[LANES],
// lane_mask, out_valid/out_ready/out. A slot is taken only when every lane
// offers it. Timing: one slot per cycle, 1-cycle latency (the tree is
// combinational with one output register; deeper pipelining is left open).
module partial_reduction
  import cheetah_pkg::*;
#(
  parameter int LANES = 512
) (
  input  logic      clk,
  input  logic      rst_n,
  input  coef_t     q,
  input  logic      lane_mask [LANES],
  input  logic      in_valid  [LANES],
  output logic      in_ready,
  input  ct_pair_t  in        [LANES],
  output logic      out_valid,
  input  logic      out_ready,
  output ct_pair_t  out
);

  localparam int P2 = 1 << $clog2(LANES);

  logic     all_valid;
  ct_pair_t node [2*P2];

  always_comb begin
    all_valid = 1'b1;
    for (int l = 0; l < LANES; l++) all_valid &= in_valid[l];
    node[0] = '0;
    for (int l = 0; l < P2; l++)
      node[P2 + l] = (l < LANES && lane_mask[l]) ? in[l] : '0;
    for (int i = P2 - 1; i >= 1; i--) begin
      node[i].c0 = mod_add(node[2*i].c0, node[2*i+1].c0, q);
      node[i].c1 = mod_add(node[2*i].c1, node[2*i+1].c1, q);
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else if (in_ready) begin
      out_valid <= all_valid;
      if (all_valid) out <= (P2 == 1) ? node[P2] : node[1];
    end
  end

  // Lanes run in lockstep: they offer their slots in the same cycle.
  for (genvar l = 1; l < LANES; l++) begin : g_lockstep
    a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) in_valid[l] == in_valid[0]);
  end

endmodule
