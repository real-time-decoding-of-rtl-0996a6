// tb_conv_checker: builds the windowed check matrix of the [[72,12,6]]
// bivariate-bicycle code over two cycles in the testbench from the code's
// polynomials (independently of the package's neighbour functions), draws
// random error vectors, and checks that conv is high for sigma = H e and
// low when one random detector is flipped.
module tb_conv_checker;
  import relay_pkg::*;
  localparam int L = 6, M = 6, W = 2;
  localparam int NQ = 2*L*M, MD = L*M, NV = W*(NQ+MD), NC = W*MD;
  logic clk = 0, rst_n = 0;
  logic [NV-1:0] e_hat;
  logic [NC-1:0] sigma;
  logic conv;
  int checks = 0, failures = 0;
  bit H [NC][NV];

  conv_checker #(.L_BB(L), .M_BB(M), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int ax[3] = '{3,0,0}, ay[3] = '{0,1,2}, bx[3] = '{0,1,2}, by[3] = '{3,0,0};
    // build H~
    for (int t = 0; t < W; t++)
      for (int i = 0; i < L; i++)
        for (int j = 0; j < M; j++) begin
          automatic int c = t*MD + i*M + j;
          for (int s = 0; s < 3; s++) begin
            H[c][t*NQ + ((i+ax[s])%L)*M + (j+ay[s])%M] = 1;
            H[c][t*NQ + L*M + ((i+bx[s])%L)*M + (j+by[s])%M] = 1;
          end
          H[c][W*NQ + t*MD + i*M + j] = 1;
          if (t > 0) H[c][W*NQ + (t-1)*MD + i*M + j] = 1;
        end
    e_hat = '0; sigma = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      for (int j = 0; j < NV; j++) e_hat[j] = ($urandom_range(0, 19) == 0);
      for (int c = 0; c < NC; c++) begin
        automatic bit p = 0;
        for (int j = 0; j < NV; j++) p ^= H[c][j] & e_hat[j];
        sigma[c] = p;
      end
      @(negedge clk);
      checks++; if (!conv) failures++;
      sigma[$urandom_range(0, NC-1)] ^= 1'b1;
      @(negedge clk);
      checks++; if (conv) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
