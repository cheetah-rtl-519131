// decompose -- splits each coefficient of a polynomial into L_CT digits in
// base A_dcmp = 2^dbits (the "Decompose" step of HERotate).
//
// After the inverse NTT the rotated partial[1] is in the coefficient domain.
// Key switching multiplies it by key polynomials; to keep the added noise
// small the coefficients are first cut into l_ct = ceil(log2(q) / dbits)
// smaller-magnitude digits, digit j = (c >> (j*dbits)) mod 2^dbits, and each
// digit polynomial goes to its own NTT unit. The digit count L_CT is the
// number of NTT units built into a lane; dbits is a run-time setting so the
// base can be retuned per layer. Digits above ceil(k/dbits) come out zero.
// Unsigned (non-balanced) digits are this design's choice.
//
// Interface: cfg.dbits, in_valid/in_ready/in_data, out_valid/out_ready with
// out_digit[L_CT]. Timing: one coefficient per cycle, 1-cycle latency.
module decompose
  import cheetah_pkg::*;
#(
  parameter int L_CT = 3
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mod_cfg_t cfg,
  input  logic     in_valid,
  output logic     in_ready,
  input  coef_t    in_data,
  output logic     out_valid,
  input  logic     out_ready,
  output coef_t    out_digit [L_CT]
);

  coef_t mask;
  coef_t digit [L_CT];

  always_comb begin
    mask = (coef_t'(1) << cfg.dbits) - coef_t'(1);
    for (int j = 0; j < L_CT; j++) begin
      // The last digit keeps every remaining high bit so no part of c is lost.
      if (j == L_CT - 1) digit[j] = in_data >> (cfg.dbits * 7'(j));
      else               digit[j] = (in_data >> (cfg.dbits * 7'(j))) & mask;
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int j = 0; j < L_CT; j++) out_digit[j] <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_digit <= digit;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
            out_valid && !out_ready |=> out_valid);

endmodule
