// simd_mult -- streaming element-wise modular multiplier (the SIMDmult kernel).
//
// A plaintext x ciphertext product in the evaluation (NTT) domain is a
// coefficient-by-coefficient multiplication mod q. This unit accepts one
// coefficient pair per cycle on a valid/ready stream, reduces the product with
// a Barrett multiplier and presents it one cycle later. It is used for HEMult
// (ciphertext polynomial x weight polynomial) and, inside HERotate, for the
// product of each decomposed digit with its key-switching key polynomial.
//
// Interface: in_valid/in_ready with a, b; out_valid/out_ready with r.
// Timing: latency 1 cycle, throughput 1 coefficient per cycle; a stalled
// output holds its value (in_ready = !out_valid || out_ready).
// One coefficient per cycle is this design's choice; the paper sweeps the
// kernel's parallelism in its design-space exploration without fixing it.
module simd_mult
  import cheetah_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  mod_cfg_t cfg,
  input  logic     in_valid,
  output logic     in_ready,
  input  coef_t    a,
  input  coef_t    b,
  output logic     out_valid,
  input  logic     out_ready,
  output coef_t    r
);

  coef_t prod;

  barrett_mulmod u_mul (.a(a), .b(b), .cfg(cfg), .r(prod));

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      r         <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) r <= prod;
    end
  end

  // A stalled output must not change.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
            out_valid && !out_ready |=> out_valid && $stable(r));

endmodule
