// tb_pauli_frame: random logical readout matrix and random committed
// estimates on a 3-cycle window of the [[72,12,6]] code; checks each frame
// update Delta f = A~ e_com computed node by node in the testbench (data
// node (t,q) acts as column q of L, measurement nodes act as nothing), the
// accumulated frame, the observables L c xor f after a codeword, and clear.
module tb_pauli_frame;
  import relay_pkg::*;
  localparam int L = 6, M = 6, W = 3, K = 12, NQ = 2*L*M, MD = L*M, NV = W*(NQ+MD);
  logic clk = 0, rst_n = 0, clear = 0, upd = 0, cw_valid = 0, df_valid;
  logic [K-1:0][NQ-1:0] lmat;
  logic [NV-1:0] e_com;
  logic [NQ-1:0] cw;
  logic [K-1:0] f, df, obs;
  int checks = 0, failures = 0;

  pauli_frame #(.L_BB(L), .M_BB(M), .W(W), .K(K)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [K-1:0] mf, md_, lc;
    for (int k = 0; k < K; k++) for (int q = 0; q < NQ; q++) lmat[k][q] = 1'($urandom_range(0, 1));
    repeat (2) @(posedge clk); rst_n = 1;
    mf = '0;
    for (int n = 0; n < 50; n++) begin
      @(negedge clk);
      for (int j = 0; j < NV; j++) e_com[j] = ($urandom_range(0, 15) == 0);
      md_ = '0;
      for (int j = 0; j < W*NQ; j++) if (e_com[j]) for (int k = 0; k < K; k++) md_[k] ^= lmat[k][j % NQ];
      upd = 1; @(negedge clk); upd = 0;
      mf ^= md_;
      checks++;
      if (!df_valid || df != md_ || f != mf) begin failures++; $display("update %0d wrong", n); end
    end
    for (int q = 0; q < NQ; q++) cw[q] = 1'($urandom_range(0, 1));
    lc = '0;
    for (int k = 0; k < K; k++) for (int q = 0; q < NQ; q++) lc[k] ^= lmat[k][q] & cw[q];
    cw_valid = 1; @(negedge clk); cw_valid = 0;
    checks++;
    if (obs != (lc ^ mf)) begin failures++; $display("observables wrong"); end
    clear = 1; @(negedge clk); clear = 0;
    checks++;
    if (f != '0 || obs != '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
