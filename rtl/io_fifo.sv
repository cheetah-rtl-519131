// io_fifo -- first-in first-out buffer used for the global I/O buffer between
// the host streaming interface and the processing engines.
//
// A circular buffer of DEPTH entries of type T with a valid/ready push side
// and a valid/ready pop side. Push and pop may happen in the same cycle. The
// storage is a plain array (an SRAM in an implementation); the read data is
// taken combinationally from the head entry.
//
// Interface: in_valid/in_ready/in_data, out_valid/out_ready/out_data, count.
// Timing: an entry pushed in cycle t can be popped in cycle t+1.
// The paper says only that the I/O buffers are small SRAMs that handle
// communication with the host; the FIFO organisation and depth are this
// design's choices.
module io_fifo #(
  parameter type T     = logic [63:0],
  parameter int  DEPTH = 128
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  T                         in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output T                         out_data,
  output logic [$clog2(DEPTH):0]   count
);

  localparam int AW = $clog2(DEPTH);

  T              mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic          push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
  a_out_stable:   assert property (@(posedge clk) disable iff (!rst_n)
                    out_valid && !out_ready |=> out_valid && out_data == $past(out_data));

endmodule
