// tb_io_fifo -- random push/pop traffic against a queue model: checks order,
// the full and empty flags, the occupancy count and that a full FIFO holds
// exactly DEPTH entries.
module tb_io_fifo;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [63:0] in_data, out_data;
  logic [$clog2(DEPTH):0] count;
  logic [63:0] model [$];
  int checks = 0, failures = 0;

  io_fifo #(.T(logic [63:0]), .DEPTH(DEPTH)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data, .count);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int full_seen;
    full_seen = 0;
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid  = (i < 1500) ? ($urandom % 4 != 0) : ($urandom % 3 == 0);
      out_ready = (i < 1500) ? ($urandom % 3 == 0) : ($urandom % 4 != 0);
      in_data   = {$urandom, $urandom};
      #1;
      checks += 3;
      if (in_ready != (model.size() < DEPTH)) begin failures++; $display("FAIL in_ready"); end
      if (out_valid != (model.size() > 0)) begin failures++; $display("FAIL out_valid"); end
      if (int'(count) != model.size()) begin failures++; $display("FAIL count %0d vs %0d", count, model.size()); end
      if (model.size() == DEPTH) full_seen++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != model[0]) begin failures++; $display("FAIL data"); end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
