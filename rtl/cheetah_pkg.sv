// cheetah_pkg -- types, constants and modular-arithmetic helpers shared by the
// HE inference accelerator.
//
// Every polynomial coefficient is an unsigned integer below the ciphertext
// modulus q and is held in COEF_W = 60 bits, the word width of the on-chip
// SRAMs (128x60 and 1024x60 arrays). q itself is a run-time value carried in
// mod_cfg_t, because the parameters are retuned layer by layer; q must satisfy
// 2 <= q < 2^(COEF_W-1) so that a sum of two residues never overflows and the
// Shoup (Harvey) multiplication below stays exact.
//
// Arithmetic kernels:
//   * mod_add / mod_sub : add or subtract, then one compare-and-correct step.
//   * shoup_mulmod       : Harvey/Shoup multiplication by a constant w with
//                          precomputed w' = floor(w * 2^64 / q). Three integer
//                          multiplies: hi(w'*y), lo(w*y), lo(Q*q).
//   * Barrett reduction lives in barrett_mulmod.sv (general a*b mod q).
// Everything here is combinational.
package cheetah_pkg;

  parameter int COEF_W  = 60;          // coefficient / SRAM word width
  parameter int SHOUP_W = 64;          // word size of the Shoup quotient

  typedef logic [COEF_W-1:0]  coef_t;
  typedef logic [SHOUP_W-1:0] shoup_t;

  // Run-time modulus configuration, written by the host once per layer.
  typedef struct packed {
    coef_t         q;        // ciphertext modulus
    logic [COEF_W:0] mu;     // Barrett constant floor(2^(2k) / q)
    logic [6:0]    k;        // bit length of q (q < 2^k, q >= 2^(k-1))
    coef_t         n_inv;    // n^-1 mod q, final INTT scaling
    shoup_t        n_inv_s;  // floor(n_inv * 2^64 / q)
    logic [6:0]    dbits;    // log2 of the ciphertext decomposition base A_dcmp
  } mod_cfg_t;

  // One twiddle factor with its Shoup companion.
  typedef struct packed {
    coef_t  w;
    shoup_t ws;
  } twiddle_t;

  // The two polynomials of a ciphertext coefficient pair.
  typedef struct packed {
    coef_t c1;
    coef_t c0;
  } ct_pair_t;

  function automatic coef_t mod_add(coef_t a, coef_t b, coef_t q);
    logic [COEF_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, q}) s = s - {1'b0, q};
    return s[COEF_W-1:0];
  endfunction

  function automatic coef_t mod_sub(coef_t a, coef_t b, coef_t q);
    coef_t d;
    if (a >= b) d = a - b;
    else        d = a + (q - b);
    return d;
  endfunction

  // Harvey/Shoup constant multiplication: returns (w*y) mod q.
  function automatic coef_t shoup_mulmod(coef_t y, coef_t w, shoup_t ws, coef_t q);
    logic [2*SHOUP_W-1:0] prod_hi;
    shoup_t               qt;
    shoup_t               r;
    prod_hi = {{(SHOUP_W-COEF_W){1'b0}}, y} * ws;                    // multiply 1
    qt      = prod_hi[2*SHOUP_W-1:SHOUP_W];
    r       = shoup_t'({{(SHOUP_W-COEF_W){1'b0}}, w} * {{(SHOUP_W-COEF_W){1'b0}}, y})   // multiply 2
            - shoup_t'(qt * {{(SHOUP_W-COEF_W){1'b0}}, q});          // multiply 3
    if (r >= {{(SHOUP_W-COEF_W){1'b0}}, q}) r = r - {{(SHOUP_W-COEF_W){1'b0}}, q};
    return r[COEF_W-1:0];
  endfunction

  // ---------------------------------------------------------------------
  // Host command stream of the accelerator top (see cheetah_top.sv).
  // ---------------------------------------------------------------------
  typedef enum logic [3:0] {
    CMD_NOP        = 4'd0,
    CMD_MOD_CFG    = 4'd1,   // data: field select in addr, value in data
    CMD_TWIDDLE    = 4'd2,   // sel=0 forward, 1 inverse; sel2=0 w, 1 w'
    CMD_INPUT_CT   = 4'd3,   // idx_a = ciphertext, sel = polynomial 0/1
    CMD_WEIGHT     = 4'd4,   // idx_a = lane
    CMD_KEY        = 4'd5,   // idx_a = key, idx_b = digit, sel = component
    CMD_LANE_CFG   = 4'd6,   // idx_a = lane; data = {active, galois, key, ct}
    CMD_START      = 4'd7,   // sel = 1: first pass (clear accumulator)
    CMD_READ_OUT   = 4'd8    // idx_a unused, sel = polynomial; reply on output
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e      op;
    logic [15:0]  pe_mask;   // which PEs take the command (broadcast allowed)
    logic [15:0]  idx_a;
    logic [7:0]   idx_b;
    logic         sel;
    logic         sel2;
    logic [15:0]  addr;      // coefficient index (or config field)
    logic [63:0]  data;
  } host_cmd_t;

  // Per-lane setting of one pass, carried in data[40:0] of CMD_LANE_CFG.
  typedef struct packed {
    logic        active;    // lane holds a partial in this pass
    logic [15:0] galois;    // Galois element of its rotation (odd, < 2N)
    logic [7:0]  key_sel;   // key-switching key set for that rotation
    logic [15:0] ct_sel;    // input ciphertext it multiplies
  } lane_cfg_t;

  // Field encodings of CMD_MOD_CFG (carried in addr).
  localparam logic [15:0] CFG_Q     = 16'd0;
  localparam logic [15:0] CFG_MU    = 16'd1;
  localparam logic [15:0] CFG_K     = 16'd2;
  localparam logic [15:0] CFG_NINV  = 16'd3;
  localparam logic [15:0] CFG_NINVS = 16'd4;
  localparam logic [15:0] CFG_DBITS = 16'd5;

endpackage
