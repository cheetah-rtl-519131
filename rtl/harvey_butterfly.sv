// harvey_butterfly -- one NTT butterfly with Harvey's constant multiplication
// (combinational).
//
// Forward (inverse = 0), Cooley-Tukey:     x' = x + w*y,   y' = x - w*y
// Inverse (inverse = 1), Gentleman-Sande:  x' = x + y,     y' = (x - y) * w
// all mod q. The product by the twiddle w uses the Shoup/Harvey method with the
// precomputed companion ws = floor(w * 2^64 / q): three integer multiplies per
// butterfly, as in the performance model of the design. Operands and results
// are fully reduced to [0, q).
//
// Interface: x, y, twiddle {w, ws}, q and the direction flag in; x_o, y_o out.
// No clock: the NTT unit writes the results back to its SRAM in the same cycle.
module harvey_butterfly
  import cheetah_pkg::*;
(
  input  logic     inverse,
  input  coef_t    x,
  input  coef_t    y,
  input  twiddle_t tw,
  input  coef_t    q,
  output coef_t    x_o,
  output coef_t    y_o
);

  coef_t t;

  always_comb begin
    if (!inverse) begin
      t   = shoup_mulmod(y, tw.w, tw.ws, q);
      x_o = mod_add(x, t, q);
      y_o = mod_sub(x, t, q);
    end else begin
      t   = mod_sub(x, y, q);
      x_o = mod_add(x, y, q);
      y_o = shoup_mulmod(t, tw.w, tw.ws, q);
    end
  end

endmodule
