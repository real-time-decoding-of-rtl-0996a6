// tb_detector_window: streams syndrome rounds, a codeword and END markers
// into the detector window ([[72,12,6]] code, W = 4, history of 8 rows)
// with random stalls, keeps a reference detector history built from the
// same rule (round differences, H c computed from the code polynomials in
// the testbench, zero rows for END), and at every window checks the
// offered detectors, including the carry u on the first cycle, then
// slides by C = 2 with a random next carry. Also checks that the input
// stalls when the history is full.
module tb_detector_window;
  import relay_pkg::*;
  localparam int L = 6, M = 6, MD = L*M, NQ = 2*L*M, W = 4, DEPTH = 8;
  logic clk = 0, rst_n = 0, clear = 0;
  logic in_valid = 0, in_ready; item_kind_e in_kind; logic [NQ-1:0] in_data;
  logic cw_valid; logic [NQ-1:0] cw;
  logic win_valid, win_ack = 0; logic [W*MD-1:0] win_det;
  logic [3:0] commit = 4'd2; logic [MD-1:0] u_next;
  logic [$clog2(DEPTH):0] fill;
  int checks = 0, failures = 0;
  logic [MD-1:0] ref_hist[$];
  logic [MD-1:0] ref_u;
  int base;
  int stalls = 0;

  detector_window #(.L_BB(L), .M_BB(M), .W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [MD-1:0] hc(logic [NQ-1:0] c);
    automatic int ax[3] = '{3,0,0}, ay[3] = '{0,1,2}, bx[3] = '{0,1,2}, by[3] = '{3,0,0};
    logic [MD-1:0] s;
    for (int i = 0; i < L; i++)
      for (int j = 0; j < M; j++) begin
        automatic bit p = 0;
        for (int t = 0; t < 3; t++) begin
          p ^= c[((i+ax[t])%L)*M + (j+ay[t])%M];
          p ^= c[L*M + ((i+bx[t])%L)*M + (j+by[t])%M];
        end
        s[i*M+j] = p;
      end
    return s;
  endfunction

  // consumer: checks and acknowledges windows
  initial begin
    base = 0; ref_u = '0;
    forever begin
      @(negedge clk);
      if (win_valid && $urandom_range(0, 3) == 0) begin
        logic [W*MD-1:0] e;
        for (int c = 0; c < W; c++) e[c*MD +: MD] = ref_hist[base + c] ^ ((c == 0) ? ref_u : '0);
        checks++;
        if (e != win_det) begin failures++; for (int c = 0; c < W; c++) if (e[c*MD +: MD] != win_det[c*MD +: MD]) $display("window at %0d row %0d differs %h %h", base, c, e[c*MD +: MD], win_det[c*MD +: MD]); end
        u_next = MD'({$urandom, $urandom});
        win_ack = 1;
        @(negedge clk);
        win_ack = 0;
        base += 2; ref_u = u_next;
      end
    end
  end

  task automatic send(item_kind_e k, logic [NQ-1:0] v);
    @(negedge clk);
    in_valid = 1; in_kind = k; in_data = v;
    @(posedge clk);
    while (!in_ready) begin stalls++; @(posedge clk); end
    #1 in_valid = 0;
  endtask

  initial begin
    logic [MD-1:0] sp;
    logic [NQ-1:0] v;
    sp = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 30; r++) begin
      v = '0;
      if (r == 25) begin
        for (int q = 0; q < NQ; q++) v[q] = 1'($urandom_range(0, 1));
        ref_hist.push_back(sp ^ hc(v)); sp = hc(v);
        send(ITEM_CW, v);
        @(negedge clk);
        checks++; if (cw != v) failures++;
      end else if (r > 25) begin
        ref_hist.push_back('0);
        send(ITEM_END, '0);
      end else begin
        for (int q = 0; q < MD; q++) v[q] = 1'($urandom_range(0, 1));
        ref_hist.push_back(sp ^ v[MD-1:0]); sp = v[MD-1:0];
        send(ITEM_SYND, v);
      end
    end
    repeat (200) @(posedge clk);
    checks++; if (stalls == 0) begin failures++; $display("input never stalled"); end
    checks++; if (base < 24) begin failures++; $display("only %0d rows committed", base); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
