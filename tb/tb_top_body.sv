// tb_top_body: end-to-end stimulus and checks for gross_decoder_top, shared
// by the reduced-size and the full-size testbench (SMALL selects which top
// is built: the [[72,12,6]] code with a 4-cycle window, or the defaults).
//
// The testbench plays a memory experiment with phenomenological noise:
// isolated single faults (a data-qubit flip that stays, or one flipped
// check measurement) are injected in some rounds; every round's syndrome
// H x xor m is sent bit by bit on shuffled readout channels, followed by the
// data-qubit codeword c = x and W-1 end markers. Since every fault is
// isolated, the decoder must find exactly the injected faults, so the
// corrected observables L c xor f must be all zero for the random logical
// readout matrix L programmed through the registers. Further checks: frame
// = XOR of all frame updates, obs = L c xor frame, statistics registers
// (windows = frame updates, all converged), trace entries, and a second
// experiment with T0 = 1 so that relay legs beyond the first are needed.
// Mechanisms counted (each must occur): input back-pressure, windows
// committed, non-zero carries, decodes needing more than one relay leg,
// END rows, codeword-derived final syndrome.
module tb_top_body #(
  parameter bit SMALL = 1'b1
) ();
  import relay_pkg::*;
  localparam int L  = SMALL ? 6 : 12;
  localparam int M  = 6;
  localparam int W  = SMALL ? 4 : 12;
  localparam int C  = SMALL ? 2 : 8;
  localparam int K  = 12;
  localparam int NQ = 2*L*M, MD = L*M, LW = (NQ + 31) / 32;
  localparam int ROUNDS = SMALL ? 14 : 12;

  logic clk = 0, rst_n = 0;
  logic reg_we = 0, reg_re = 0, reg_rvalid;
  logic [15:0] reg_addr = 0; logic [31:0] reg_wdata = 0, reg_rdata;
  logic rd_valid = 0, rd_ready, rd_bit = 0, rd_end = 0; logic [7:0] rd_chan = 0;
  logic df_valid, obs_valid;
  logic [K-1:0] df, frame, obs;
  int checks = 0, failures = 0;

  if (SMALL) begin : g_small
    gross_decoder_top #(.L_BB(L), .M_BB(M), .W(W), .K(K)) dut (.*);
  end else begin : g_full
    gross_decoder_top dut (.*);
  end

  always #5 clk = ~clk;

  initial begin
    repeat (SMALL ? 400000 : 300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- helpers
  logic [NQ-1:0] lm [K];
  int perm [256];
  int n_stall = 0, n_df = 0, n_carry = 0, n_multileg = 0, n_end = 0, n_cw = 0;
  logic [K-1:0] df_acc = '0;

  always @(posedge clk) if (rd_valid && !rd_ready) n_stall++;
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

  task automatic wr(int a, int d);
    @(negedge clk); reg_we = 1; reg_addr = 16'(a); reg_wdata = d;
    @(negedge clk); reg_we = 0;
  endtask
  task automatic rd(int a, output int d);
    @(negedge clk); reg_re = 1; reg_addr = 16'(a);
    @(negedge clk); reg_re = 0; d = reg_rdata;
  endtask
  task automatic beat(int ch, bit b, bit e);
    @(negedge clk); rd_valid = 1; rd_chan = 8'(ch); rd_bit = b; rd_end = e;
    @(posedge clk);
    while (!rd_ready) @(posedge clk);
    #1 rd_valid = 0; rd_end = 0;
  endtask
  task automatic send_bits(logic [NQ-1:0] v, int n, int ch0);
    int order[];
    order = new[n];
    foreach (order[i]) order[i] = i;
    order.shuffle();
    foreach (order[i]) beat(perm[ch0 + order[i]], v[order[i]], 1'b0);
  endtask

  // carries and relay legs seen by the commit step (hierarchical peek)
  if (SMALL) begin : g_mon_s
    always @(posedge clk) if (g_small.dut.u_wdec.win_ack) begin
      if (|g_small.dut.u_wdec.u_next) n_carry++;
      if (g_small.dut.u_wdec.last_legs > 1) n_multileg++;
    end
  end else begin : g_mon_f
    always @(posedge clk) if (g_full.dut.u_wdec.win_ack) begin
      if (|g_full.dut.u_wdec.u_next) n_carry++;
      if (g_full.dut.u_wdec.last_legs > 1) n_multileg++;
    end
  end

  task automatic chk(string n, int got, int exp);
    checks++; if (got != exp) begin failures++; $display("%s: got %0d exp %0d", n, got, exp); end
  endtask

  task automatic experiment(int t0);
    logic [NQ-1:0] x, v;
    logic [MD-1:0] s;
    logic [K-1:0] lc;
    int d, nwin0, df0;
    wr(1, 1);                      // clear
    wr(3, t0);
    df_acc = '0; df0 = n_df;
    x = '0;
    for (int r = 0; r < ROUNDS; r++) begin
      int kind = (r % 3 == 1) ? $urandom_range(0, 1) : 2;
      logic [MD-1:0] m = '0;
      if (kind == 0) x[$urandom_range(0, NQ-1)] ^= 1'b1;
      if (kind == 1) m[$urandom_range(0, MD-1)] = 1'b1;
      s = hx(x) ^ m;
      v = NQ'(s);
      send_bits(v, MD, 0);
    end
    send_bits(x, NQ, MD);
    n_cw++;
    for (int e = 0; e < W - 1; e++) begin beat(0, 1'b0, 1'b1); n_end++; end
    wait (obs_valid);
    @(negedge clk);
    lc = '0;
    for (int k = 0; k < K; k++) lc[k] = ^(lm[k] & x);
    chk("obs = L c ^ frame", int'(obs), int'(lc ^ frame));
    chk("frame = xor of updates", int'(frame), int'(df_acc));
    chk($sformatf("corrected observables (T0=%0d)", t0), int'(obs), 0);
    rd('h10, nwin0); chk("windows = frame updates", nwin0, n_df - df0);
    rd('h11, d);     chk("all windows converged", d, nwin0);
    chk($sformatf("window count (T0=%0d)", t0), nwin0, (ROUNDS + 1 + W - 1 - W) / C + 1);
    rd('h13, d);     checks++; if (d == 0) failures++;
  endtask

  initial begin
    int d;
    repeat (3) @(posedge clk); rst_n = 1;
    rd(0, d); chk("id", d, 32'h52425031);
    wr(2, C);
    for (int c = 0; c < 256; c++) perm[c] = c;
    perm.shuffle();
    // mapping table: syndrome bit k on channel perm[k], codeword bit q on perm[MD+q]
    for (int k = 0; k < MD; k++) wr('h1000 + perm[k], (1 << ($clog2(NQ))) | k);
    for (int q = 0; q < NQ; q++) wr('h1000 + perm[MD + q], (2 << ($clog2(NQ))) | q);
    // random logical readout matrix
    for (int k = 0; k < K; k++) begin
      for (int q = 0; q < NQ; q++) lm[k][q] = 1'($urandom_range(0, 1));
      for (int w = 0; w < LW; w++) wr('h100 + k*LW + w, int'(32'(lm[k] >> (32*w))));
    end
    experiment(80);
    experiment(1);
    $display("mechanisms: stalls=%0d windows=%0d carries=%0d multi-leg=%0d end-rows=%0d codewords=%0d",
             n_stall, n_df, n_carry, n_multileg, n_end, n_cw);
    checks++; if (n_stall == 0)    begin failures++; $display("no back-pressure seen"); end
    checks++; if (n_df == 0)       failures++;
    checks++; if (n_carry == 0)    begin failures++; $display("no carry seen"); end
    checks++; if (n_multileg == 0) begin failures++; $display("no multi-leg relay seen"); end
    checks++; if (n_end == 0 || n_cw == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
