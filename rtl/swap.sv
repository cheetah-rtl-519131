// swap -- slot permutation of a polynomial in the evaluation domain (the
// "Swap" step of HERotate).
//
// Rotating the packed slots of a BFV ciphertext applies the Galois
// automorphism a(x) -> a(x^g) to both polynomials, g odd and below 2n
// (g = 3^r mod 2n rotates by r slots). In the evaluation domain this is a pure
// permutation: slot j of the NTT output holds a(psi^e_j) with
// e_j = 2*bitrev(j) + 1, so the result in slot j is the input slot whose
// exponent is e_j * g mod 2n, i.e. src(j) = bitrev(((e_j * g) mod 2n - 1) / 2).
// Only index arithmetic is needed, no modular multiplication.
//
// A permutation needs the whole polynomial, so the unit holds one polynomial
// buffer (N words): it loads N coefficients in order, then emits N permuted
// coefficients in order. The paper's lane diagram draws Swap without an SRAM;
// the buffer is this design's choice for a streaming lane.
//
// Interface: galois (latched with the first coefficient of each polynomial), in_valid/in_ready/in_data,
// out_valid/out_ready/out_data. Timing: N cycles to load, N cycles to unload,
// one coefficient per cycle each way; loading and unloading do not overlap.
module swap
  import cheetah_pkg::*;
#(
  parameter int N = 4096
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [$clog2(N):0]     galois,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  coef_t                  in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output coef_t                  out_data
);

  localparam int LOGN = $clog2(N);

  coef_t              buf_q [N];
  logic [LOGN:0]      gal_q;      // Galois element latched with the first coefficient
  logic [LOGN-1:0]    cnt;
  logic               unloading;
  logic [LOGN-1:0]    src;

  function automatic logic [LOGN-1:0] bitrev(logic [LOGN-1:0] v);
    logic [LOGN-1:0] o;
    for (int i = 0; i < LOGN; i++) o[i] = v[LOGN-1-i];
    return o;
  endfunction

  always_comb begin
    logic [LOGN:0]   e;
    logic [2*LOGN+1:0] p;
    logic [LOGN:0]   e2;
    e   = {bitrev(cnt), 1'b1};
    p   = {{(LOGN+1){1'b0}}, e} * {{(LOGN+1){1'b0}}, gal_q};
    e2  = p[LOGN:0];                     // mod 2N, odd
    src = bitrev(e2[LOGN:1]);            // (e2 - 1) / 2
  end

  assign in_ready  = !unloading;
  assign out_valid = unloading;
  assign out_data  = buf_q[src];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      unloading <= 1'b0;
    end else if (!unloading) begin
      if (in_valid) begin
        cnt <= cnt + 1'b1;
        if (cnt == LOGN'(N-1)) unloading <= 1'b1;
      end
    end else if (out_ready) begin
      cnt <= cnt + 1'b1;
      if (cnt == LOGN'(N-1)) unloading <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (!unloading && in_valid) buf_q[cnt] <= in_data;
    if (!unloading && in_valid && cnt == '0) gal_q <= galois;
  end

  a_odd: assert property (@(posedge clk) disable iff (!rst_n) in_valid && !unloading |-> galois[0]);

endmodule
