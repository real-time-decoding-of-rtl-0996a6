// tb_ms_mul: exhaustive check of the reduced-logic memory-strength
// multiplier against the per-bit truncation rule, plus the worked example
// 15 x 7 at M = 8 which must give 11 (88 / 8).
module tb_ms_mul;
  logic [3:0] x;
  logic [4:0] beta;
  logic [6:0] p;
  int checks = 0, failures = 0;

  ms_mul #(.X_W(4), .BETA_W(5), .SHIFT(3)) dut (.x(x), .beta(beta), .p(p));

  function automatic int ref_mul(int xv, int bv);
    int s = 0;
    for (int k = 0; k < 4; k++)
      if ((xv >> k) & 1) s += ((bv << k) / 8);
    return s;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x = 4'd15; beta = 5'd7; #1;
    checks++; if (p != 7'd11) begin failures++; $display("example 15x7 gave %0d", p); end
    x = 4'd8; beta = 5'd7; #1;
    checks++; if (p != 7'd7) failures++;
    for (int xv = 0; xv < 16; xv++)
      for (int bv = 0; bv <= 16; bv++) begin
        x = xv[3:0]; beta = bv[4:0]; #1;
        checks++;
        if (int'(p) != ref_mul(xv, bv)) begin
          failures++;
          $display("x=%0d beta=%0d p=%0d exp=%0d", xv, bv, p, ref_mul(xv, bv));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
