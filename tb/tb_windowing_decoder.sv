// tb_windowing_decoder: the sliding-window decoder fed with items directly
// ([[72,12,6]] code, W = 3, commit width C = 1, history depth 6 so that the
// input stalls while a window decodes). Isolated single faults (data flip
// or measurement flip) are injected into a phenomenological memory
// experiment; the decoder must recover each exactly, so the corrected
// observables L c xor f are zero for a random L. Also checked: frame = XOR
// of the frame updates, obs = L c xor frame, number of windows
// (T - W) / C + 1 for T detector rows, every window converged, and
// back-pressure occurred.
module tb_windowing_decoder;
  import relay_pkg::*;
  localparam int L = 6, M = 6, W = 3, K = 12, DEPTH = 6, ROUNDS = 9;
  localparam int NQ = 2*L*M, MD = L*M;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [3:0] commit = 4'd1;
  logic [IT_W-1:0] t0_max = 80, tr_max = 60, r_max = 600, s_max = 1;
  logic [BETA_W-1:0] beta0 = 7, beta_min = 3, beta_max = 10;
  logic [MAG_W-1:0] prior_data = 14, prior_meas = 14;
  logic [K-1:0][NQ-1:0] lmat;
  logic in_valid = 0, in_ready;
  item_kind_e in_kind = ITEM_SYND;
  logic [NQ-1:0] in_data = '0;
  logic df_valid, obs_valid, ev_dec_start, ev_dec_done;
  logic [K-1:0] df, frame, obs, df_acc = '0;
  logic [31:0] n_windows, n_converged, n_iters;
  logic [IT_W-1:0] last_legs;
  int checks = 0, failures = 0, n_stall = 0, n_df = 0;

  windowing_decoder #(.L_BB(L), .M_BB(M), .W(W), .K(K), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (in_valid && !in_ready) n_stall++;
  always @(posedge clk) if (rst_n && df_valid) begin n_df++; df_acc ^= df; end

  function automatic logic [MD-1:0] hx(logic [NQ-1:0] x);
    automatic int ax[3] = '{3,0,0}, ay[3] = '{0,1,2}, bx[3] = '{0,1,2}, by[3] = '{3,0,0};
    logic [MD-1:0] s;
    for (int i = 0; i < L; i++)
      for (int j = 0; j < M; j++) begin
        automatic bit p = 0;
        for (int t = 0; t < 3; t++) begin
          p ^= x[((i+ax[t])%L)*M + (j+ay[t])%M];
          p ^= x[L*M + ((i+bx[t])%L)*M + (j+by[t])%M];
        end
        s[i*M+j] = p;
      end
    return s;
  endfunction
  task automatic send(item_kind_e k, logic [NQ-1:0] v);
    @(negedge clk); in_valid = 1; in_kind = k; in_data = v;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
  endtask
  task automatic chk(string n, int got, int exp);
    checks++; if (got != exp) begin failures++; $display("%s: got %0d exp %0d", n, got, exp); end
  endtask

  initial begin
    logic [NQ-1:0] x;
    logic [K-1:0] lc;
    for (int k = 0; k < K; k++) for (int q = 0; q < NQ; q++) lmat[k][q] = 1'($urandom_range(0, 1));
    repeat (2) @(posedge clk); rst_n = 1;
    for (int e = 0; e < 3; e++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0; df_acc = '0; n_df = 0;
      x = '0;
      for (int r = 0; r < ROUNDS; r++) begin
        automatic logic [MD-1:0] m = '0;
        if (r % 3 == 1) begin
          if ($urandom_range(0, 1)) x[$urandom_range(0, NQ-1)] ^= 1'b1;
          else m[$urandom_range(0, MD-1)] = 1'b1;
        end
        send(ITEM_SYND, NQ'(hx(x) ^ m));
      end
      send(ITEM_CW, x);
      checks++; if (obs_valid) failures++;          // not before the END rows
      for (int n = 0; n < W - 1; n++) send(ITEM_END, '0);
      wait (obs_valid); @(negedge clk);
      lc = '0;
      for (int k = 0; k < K; k++) lc[k] = ^(lmat[k] & x);
      chk("obs = Lc ^ frame", int'(obs), int'(lc ^ frame));
      chk("frame = xor df", int'(frame), int'(df_acc));
      chk("corrected observables", int'(obs), 0);
      chk("windows", int'(n_windows), ROUNDS + 1);
      chk("frame updates", n_df, int'(n_windows));
      chk("converged", int'(n_converged), int'(n_windows));
    end
    checks++; if (n_stall == 0) begin failures++; $display("no back-pressure"); end
    $display("stall cycles %0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
