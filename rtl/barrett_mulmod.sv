// barrett_mulmod -- general modular multiplier r = (a * b) mod q using Barrett
// reduction (combinational).
//
// The accelerator uses Barrett reduction for every element-wise ciphertext x
// plaintext product. With k = bit length of q and mu = floor(2^(2k) / q)
// (both supplied in the run-time mod_cfg_t), the classic steps are
//     x  = a * b                       (< q^2 < 2^(2k))
//     q1 = x >> (k-1)
//     q3 = (q1 * mu) >> (k+1)          (quotient estimate, at most 2 too small)
//     r  = x - q3 * q                  (in [0, 3q))
// followed by up to two conditional subtractions of q. The word-serial
// software form counts five integer multiplies; this single-word hardware form
// needs three wide ones. Inputs must already be reduced (a, b < q).
//
// Interface: a, b, cfg in; r out. Purely combinational, no clock; the
// streaming wrapper simd_mult.sv registers the result.
module barrett_mulmod
  import cheetah_pkg::*;
(
  input  coef_t    a,
  input  coef_t    b,
  input  mod_cfg_t cfg,
  output coef_t    r
);

  localparam int XW = 2 * COEF_W;

  logic [XW-1:0]          x;
  logic [XW-1:0]          q1;
  logic [XW+COEF_W:0]     q2;
  logic [XW+COEF_W:0]     q3;
  logic [COEF_W+1:0]      rr;

  always_comb begin
    x  = {{COEF_W{1'b0}}, a} * {{COEF_W{1'b0}}, b};
    q1 = x >> (cfg.k - 7'd1);
    q2 = {{(COEF_W+1){1'b0}}, q1} * {{XW{1'b0}}, cfg.mu};
    q3 = q2 >> (cfg.k + 7'd1);
    // Only the low k+2 bits of the difference matter: the true value is < 3q.
    rr = x[COEF_W+1:0] - (q3[COEF_W+1:0] * {2'b00, cfg.q});
    if (rr >= {2'b00, cfg.q}) rr = rr - {2'b00, cfg.q};
    if (rr >= {2'b00, cfg.q}) rr = rr - {2'b00, cfg.q};
    r = rr[COEF_W-1:0];
  end

endmodule
