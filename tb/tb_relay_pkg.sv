// tb_relay_pkg: checks the decoding-graph functions of relay_pkg against a
// check matrix built here independently from the code polynomials
// A = x^3 + y + y^2, B = y^3 + x + x^2 (l = 12, m = 6, gross code) and the
// phenomenological window rule (W = 3): every check's neighbour list must
// match the matrix row, the error-node view (var_chk / var_slot) must be
// the exact inverse of the check view, and the node degrees must be 6 + 1
// or 6 + 2 (checks) and 3 or 1..2 (error nodes). Also checks sat_mag.
module tb_relay_pkg;
  import relay_pkg::*;
  localparam int L = 12, M = 6, W = 3;
  localparam int NQ = 2*L*M, MD = L*M, NV = W*(NQ+MD), NC = W*MD;
  int checks = 0, failures = 0;
  bit h [NC][NV];
  logic clk = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask
  initial begin
    // independent window matrix
    for (int t = 0; t < W; t++)
      for (int i = 0; i < L; i++)
        for (int j = 0; j < M; j++) begin
          automatic int k = i*M + j, c = t*MD + k;
          h[c][t*NQ + ((i+3)%L)*M + j] = 1;          // x^3
          h[c][t*NQ + i*M + (j+1)%M] = 1;            // y
          h[c][t*NQ + i*M + (j+2)%M] = 1;            // y^2
          h[c][t*NQ + L*M + i*M + (j+3)%M] = 1;      // y^3
          h[c][t*NQ + L*M + ((i+1)%L)*M + j] = 1;    // x
          h[c][t*NQ + L*M + ((i+2)%L)*M + j] = 1;    // x^2
          h[c][W*NQ + t*MD + k] = 1;
          if (t > 0) h[c][W*NQ + (t-1)*MD + k] = 1;
        end
    for (int c = 0; c < NC; c++) begin
      automatic int deg = 0;
      automatic bit seen [NV] = '{default: 0};
      for (int s = 0; s < DC; s++) begin
        automatic int v = chk_nbr(L, M, W, c, s);
        if (v >= 0) begin
          deg++;
          chk(h[c][v] && !seen[v], $sformatf("check %0d slot %0d -> %0d", c, s, v));
          seen[v] = 1;
          begin
            automatic bit back = 0;
            for (int r = 0; r < DV; r++)
              if (var_chk(L, M, W, v, r) == c && var_slot(L, M, W, v, r) == s) back = 1;
            chk(back, $sformatf("inverse of check %0d slot %0d", c, s));
          end
        end
      end
      begin
        automatic int rowdeg = 0;
        for (int v = 0; v < NV; v++) rowdeg += h[c][v];
        chk(deg == rowdeg && deg == (c < MD ? 7 : 8), $sformatf("check %0d degree %0d", c, deg));
      end
    end
    for (int v = 0; v < NV; v++) begin
      automatic int deg = 0;
      for (int r = 0; r < DV; r++) if (var_chk(L, M, W, v, r) >= 0) deg++;
      chk(deg == (v < W*NQ ? 3 : (v >= W*NQ + (W-1)*MD ? 1 : 2)), $sformatf("error %0d degree", v));
      chk(var_cycle(L, M, W, v) == (v < W*NQ ? v / NQ : (v - W*NQ) / MD), "cycle");
    end
    chk(sat_mag(8'sd40) == 15 && sat_mag(-8'sd40) == -15 && sat_mag(-8'sd3) == -3, "sat_mag");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
