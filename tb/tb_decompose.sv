// tb_decompose -- random coefficients through the digit splitter for several
// bases; each digit is compared with shift-and-mask arithmetic and the digits
// are recombined (sum d_j * 2^(j*dbits)) to the original value.
module tb_decompose;
  import cheetah_pkg::*;
  localparam int L = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mod_cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  coef_t in_data, digit [L];
  int checks = 0, failures = 0;
  logic [63:0] q_in [$];

  decompose #(.L_CT(L)) dut (.clk, .rst_n, .cfg, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_digit(digit));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    logic [63:0] v, sum;
    int db;
    v = q_in.pop_front();
    db = int'(cfg.dbits);
    sum = 0;
    for (int j = 0; j < L; j++) begin
      logic [63:0] e;
      e = (j == L - 1) ? (v >> (db * j)) : ((v >> (db * j)) & ((64'd1 << db) - 1));
      checks++;
      if (64'(digit[j]) != e) begin failures++; $display("FAIL digit %0d of %h: %h exp %h", j, v, digit[j], e); end
      sum += 64'(digit[j]) << (db * j);
    end
    checks++;
    if (sum != v) begin failures++; $display("FAIL recompose %h", v); end
  end

  initial begin
    cfg = '0; cfg.dbits = 20;
    in_valid = 0; out_ready = 1; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 3; b++) begin
      @(negedge clk); in_valid = 0;
      repeat (3) @(negedge clk);
      cfg.dbits = (b == 0) ? 7'd20 : (b == 1) ? 7'd16 : 7'd30;
      for (int i = 0; i < 300; i++) begin
        in_valid = ($urandom % 4) != 0;
        out_ready = ($urandom % 4) != 0;
        in_data = coef_t'({$urandom, $urandom});
        #1;
        if (in_valid && in_ready) q_in.push_back(64'(in_data));
        @(negedge clk);
      end
      in_valid = 0; out_ready = 1;
      repeat (3) @(negedge clk);
    end
    checks++;
    if (q_in.size() != 0) begin failures++; $display("FAIL lost %0d", q_in.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
