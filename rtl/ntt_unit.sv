// ntt_unit -- in-place negacyclic NTT / inverse NTT over Z_q[x]/(x^N + 1)
// with its own coefficient SRAM.
//
// The unit converts a polynomial between the coefficient domain and the
// evaluation domain. Forward mode runs the Cooley-Tukey schedule on a
// coefficient-order input and leaves the evaluations in bit-reversed slot
// order: slot j = a(psi^(2*bitrev(j)+1)), psi a primitive 2N-th root of unity.
// Inverse mode runs the Gentleman-Sande schedule on that bit-reversed order,
// returns coefficient order and multiplies by N^-1 while unloading.
//
//   forward, stage s = 0..log2N-1, t = N >> (s+1), butterfly b = 0..N/2-1:
//       i = b / t,  j = 2*i*t + b mod t,  pair (j, j+t),  twiddle[2^s + i]
//   inverse, stage s, t = 2^s:
//       i = b / t,  j = 2*i*t + b mod t,  pair (j, j+t),  twiddle[N/2^(s+1) + i]
// Forward twiddles are psi^bitrev(k), inverse ones psi^-bitrev(k), each with
// its Shoup companion; they live in a twiddle SRAM outside the unit that all
// lanes of a PE share (the lanes run in lockstep, so one read port serves
// them). The unit drives tw_addr and takes the word back in the same cycle.
//
// Interface: inverse (held for a whole operation), cfg (q, N^-1), load stream
// in_valid/in_ready/in_data, unload stream out_valid/out_ready/out_data/out_idx.
// Timing: N load cycles, (N/2)*log2(N) butterfly cycles (one Harvey butterfly
// per cycle), N unload cycles. One butterfly per cycle is this design's choice;
// the paper only says NTT parallelism is a design-space parameter.
module ntt_unit
  import cheetah_pkg::*;
#(
  parameter int N = 4096
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 inverse,
  input  mod_cfg_t             cfg,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  coef_t                in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output coef_t                out_data,
  output logic [$clog2(N)-1:0] out_idx,
  output logic [$clog2(N)-1:0] tw_addr,
  input  twiddle_t             tw,
  output logic                 busy
);

  localparam int LOGN = $clog2(N);
  localparam int SW   = $clog2(LOGN) + 1;

  typedef enum logic [1:0] {S_LOAD, S_COMPUTE, S_UNLOAD} state_e;

  state_e            state;
  coef_t             mem [N];
  logic [LOGN-1:0]   cnt;      // load / unload index
  logic [SW-1:0]     stage;
  logic [LOGN-2:0]   bfly;
  logic [LOGN-1:0]   ja, jb;
  coef_t             xo, yo;

  // Butterfly addressing.
  always_comb begin
    logic [LOGN-1:0] t;
    logic [LOGN-1:0] b;
    logic [LOGN-1:0] i;
    logic [SW-1:0]   lt;       // log2(t)
    b = {1'b0, bfly};
    if (!inverse) lt = SW'(LOGN - 1) - stage;
    else          lt = stage;
    t  = LOGN'(1) << lt;
    i  = b >> lt;
    ja = (i << (lt + 1'b1)) | (b & (t - 1'b1));
    jb = ja + t;
    if (!inverse) tw_addr = (LOGN'(1) << stage) + i;
    else          tw_addr = LOGN'(N >> (stage + 1)) + i;
  end

  harvey_butterfly u_bf (
    .inverse (inverse),
    .x       (mem[ja]),
    .y       (mem[jb]),
    .tw      (tw),
    .q       (cfg.q),
    .x_o     (xo),
    .y_o     (yo)
  );

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_UNLOAD);
  assign out_idx   = cnt;
  assign out_data  = inverse ? shoup_mulmod(mem[cnt], cfg.n_inv, cfg.n_inv_s, cfg.q) : mem[cnt];
  assign busy      = (state != S_LOAD) || (cnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      cnt   <= '0;
      stage <= '0;
      bfly  <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          cnt <= cnt + 1'b1;
          if (cnt == LOGN'(N-1)) state <= S_COMPUTE;
        end
        S_COMPUTE: begin
          bfly <= bfly + 1'b1;
          if (bfly == (LOGN-1)'(N/2-1)) begin
            stage <= stage + 1'b1;
            if (stage == SW'(LOGN-1)) begin
              stage <= '0;
              state <= S_UNLOAD;
            end
          end
        end
        S_UNLOAD: if (out_ready) begin
          cnt <= cnt + 1'b1;
          if (cnt == LOGN'(N-1)) state <= S_LOAD;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) mem[cnt] <= in_data;
    else if (state == S_COMPUTE) begin
      mem[ja] <= xo;
      mem[jb] <= yo;
    end
  end

  a_mode_stable: assert property (@(posedge clk) disable iff (!rst_n)
                   state == S_COMPUTE |=> $stable(inverse));

endmodule
