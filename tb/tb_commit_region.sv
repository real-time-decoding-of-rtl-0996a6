// tb_commit_region: random window estimates on a 4-cycle window of the
// [[72,12,6]] code; for every commit width C = 1..3 the testbench checks
// the committed mask (error nodes of cycles < C: data nodes by their cycle
// block, measurement nodes by theirs) and the carry u, which for this
// window must equal the committed measurement errors of cycle C-1 (a data
// error only touches checks of its own cycle).
module tb_commit_region;
  import relay_pkg::*;
  localparam int L = 6, M = 6, W = 4, NQ = 2*L*M, MD = L*M, NV = W*(NQ+MD);
  logic [NV-1:0] e_hat, e_com;
  logic [3:0] commit;
  logic [MD-1:0] u;
  int checks = 0, failures = 0;

  commit_region #(.L_BB(L), .M_BB(M), .W(W)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NV-1:0] em;
    logic [MD-1:0] eu;
    for (int n = 0; n < 100; n++) begin
      for (int j = 0; j < NV; j++) e_hat[j] = 1'($urandom_range(0, 1));
      for (int c = 1; c < W; c++) begin
        commit = 4'(c);
        #1;
        for (int j = 0; j < NV; j++) begin
          automatic int cyc = (j < W*NQ) ? j / NQ : (j - W*NQ) / MD;
          em[j] = e_hat[j] && (cyc < c);
        end
        for (int k = 0; k < MD; k++) eu[k] = e_hat[W*NQ + (c-1)*MD + k];
        checks++;
        if (e_com != em) begin failures++; $display("mask wrong C=%0d", c); end
        checks++;
        if (u != eu) begin failures++; $display("carry wrong C=%0d", c); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
