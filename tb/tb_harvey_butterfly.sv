// tb_harvey_butterfly -- checks both butterfly directions against 128-bit
// reference arithmetic on random operands and random twiddles.
module tb_harvey_butterfly;
  import cheetah_pkg::*;
  import tb_ref_pkg::*;

  logic inverse;
  coef_t x, y, xo, yo, q;
  twiddle_t tw;
  int checks = 0, failures = 0;

  harvey_butterfly dut (.inverse(inverse), .x(x), .y(y), .tw(tw), .q(q), .x_o(xo), .y_o(yo));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] qq, ex, ey, w, t;
    logic [63:0] qs [2];
    qs[0] = 64'(Q60); qs[1] = 64'd12289;
    foreach (qs[m]) begin
      qq = qs[m]; q = coef_t'(qq);
      for (int i = 0; i < 1000; i++) begin
        inverse = i[0];
        x = coef_t'({$urandom, $urandom} % qq);
        y = coef_t'({$urandom, $urandom} % qq);
        if (i == 2) begin x = coef_t'(qq - 1); y = coef_t'(qq - 1); end
        w = {$urandom, $urandom} % qq;
        tw.w = coef_t'(w); tw.ws = shoup(w, qq);
        #1;
        if (!inverse) begin
          t  = mulmod(w, 64'(y), qq);
          ex = addmod(64'(x), t, qq);
          ey = addmod(64'(x), qq - t, qq);
        end else begin
          ex = addmod(64'(x), 64'(y), qq);
          ey = mulmod(addmod(64'(x), qq - 64'(y), qq), w, qq);
        end
        checks += 2;
        if (64'(xo) != ex) begin failures++; $display("FAIL x inv=%0d", inverse); end
        if (64'(yo) != ey) begin failures++; $display("FAIL y inv=%0d", inverse); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
