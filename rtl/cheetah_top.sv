// cheetah_top -- HE inference accelerator: NUM_PE output-stationary processing
// engines behind a global I/O buffer.
//
// The host reaches the accelerator over a streaming interface (a PCIe-like
// link, not part of this RTL): it pushes host_cmd_t words and pops 64-bit
// result words. Both directions pass through the global I/O buffer, built as
// two io_fifo queues. A dispatcher pops one command at a time and hands it to
// the PEs selected by its pe_mask, so activations are broadcast into every PE
// in one command (each PE keeps its own copy), while weights, keys, lane
// settings and START go to individual PEs: each PE computes a different output
// ciphertext (output-ciphertext parallelism); layers with more output
// ciphertexts than PEs are time-multiplexed by the host.
//
// Dispatch rules: a command whose target PEs include a busy one waits (the
// dispatcher stalls, later commands queue behind it); a CMD_READ_OUT reads
// word addr of polynomial sel of the output ciphertext of the lowest PE in
// pe_mask and pushes it into the output queue one cycle later; it waits while
// a previous read is in flight or the output queue is full.
//
// Interface: host_in_valid/host_in_ready/host_in, host_out_valid/
// host_out_ready/host_out, pe_busy. Timing: a command reaches the PEs at the
// earliest one cycle after it is pushed; each PE pass takes about
// 4N + N*log2(N) cycles (see he_pe).
// PE and lane counts default to the paper's ResNet50 design point (8 PEs of
// 512 lanes); the command set, queue depth and dispatch rules are this
// design's own.
module cheetah_top
  import cheetah_pkg::*;
#(
  parameter int NUM_PE     = 8,
  parameter int N          = 4096,
  parameter int LANES      = 512,
  parameter int L_CT       = 3,
  parameter int IN_CTS     = 256,
  parameter int KEYS       = 16,
  parameter int FIFO_DEPTH = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        host_in_valid,
  output logic        host_in_ready,
  input  host_cmd_t   host_in,
  output logic        host_out_valid,
  input  logic        host_out_ready,
  output logic [63:0] host_out,
  output logic [NUM_PE-1:0] pe_busy
);

  localparam int LOGN = $clog2(N);
  localparam int PW   = (NUM_PE > 1) ? $clog2(NUM_PE) : 1;

  // Global I/O buffer -------------------------------------------------------
  logic        cmd_valid, cmd_pop;
  host_cmd_t   cmd;
  logic        resp_push, resp_ready;
  logic [63:0] resp_data;
  logic [$clog2(FIFO_DEPTH):0] in_count, out_count;

  io_fifo #(.T(host_cmd_t), .DEPTH(FIFO_DEPTH)) u_in_buf (
    .clk, .rst_n,
    .in_valid  (host_in_valid),
    .in_ready  (host_in_ready),
    .in_data   (host_in),
    .out_valid (cmd_valid),
    .out_ready (cmd_pop),
    .out_data  (cmd),
    .count     (in_count)
  );

  io_fifo #(.T(logic [63:0]), .DEPTH(FIFO_DEPTH)) u_out_buf (
    .clk, .rst_n,
    .in_valid  (resp_push),
    .in_ready  (resp_ready),
    .in_data   (resp_data),
    .out_valid (host_out_valid),
    .out_ready (host_out_ready),
    .out_data  (host_out),
    .count     (out_count)
  );

  // Dispatcher --------------------------------------------------------------
  logic [NUM_PE-1:0] target;
  logic              target_busy;
  logic              is_read;
  logic              rd_inflight;
  logic [PW-1:0]     rd_pe, rd_pe_q;
  coef_t             pe_rd_data [NUM_PE];
  logic              pe_done [NUM_PE];

  always_comb begin
    target      = cmd.pe_mask[NUM_PE-1:0];
    target_busy = |(target & pe_busy);
    is_read     = (cmd.op == CMD_READ_OUT);
    rd_pe       = '0;
    for (int p = NUM_PE - 1; p >= 0; p--) if (target[p]) rd_pe = PW'(p);
    if (is_read) cmd_pop = cmd_valid && !rd_inflight && resp_ready && !pe_busy[rd_pe];
    else         cmd_pop = cmd_valid && !target_busy;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_inflight <= 1'b0;
      rd_pe_q     <= '0;
    end else begin
      rd_inflight <= cmd_pop && is_read;
      if (cmd_pop && is_read) rd_pe_q <= rd_pe;
    end
  end

  assign resp_push = rd_inflight;
  assign resp_data = {{(64-COEF_W){1'b0}}, pe_rd_data[rd_pe_q]};

  // Processing engines ------------------------------------------------------
  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    he_pe #(.N(N), .LANES(LANES), .L_CT(L_CT), .IN_CTS(IN_CTS), .KEYS(KEYS)) u_pe (
      .clk, .rst_n,
      .cmd_valid (cmd_pop && !is_read && target[p]),
      .cmd       (cmd),
      .busy      (pe_busy[p]),
      .done      (pe_done[p]),
      .rd_sel    (cmd.sel),
      .rd_addr   (LOGN'(cmd.addr)),
      .rd_data   (pe_rd_data[p])
    );
  end

  initial assert (NUM_PE <= 16) else $error("pe_mask has 16 bits");
  a_resp_room: assert property (@(posedge clk) disable iff (!rst_n) resp_push |-> resp_ready);

endmodule
