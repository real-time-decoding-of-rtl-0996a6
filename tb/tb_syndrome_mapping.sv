// tb_syndrome_mapping: programs a random permutation of readout channels to
// syndrome and codeword bits ([[72,12,6]] code: 36 + 72 channels, the rest
// unused), sends rounds of random bits in random channel order with stray
// beats on unused channels, applies random downstream back-pressure, and
// checks every emitted item's kind and bits against the intended round.
module tb_syndrome_mapping;
  import relay_pkg::*;
  localparam int L = 6, M = 6, MD = L*M, NQ = 2*L*M, NCH = 128;
  localparam int IDX_W = $clog2(NQ);
  logic clk = 0, rst_n = 0;
  logic tbl_we = 0; logic [6:0] tbl_addr; logic [IDX_W+1:0] tbl_data;
  logic rd_valid = 0, rd_ready, rd_bit = 0, rd_end = 0; logic [6:0] rd_chan = 0;
  logic out_valid, out_ready = 0; item_kind_e out_kind; logic [NQ-1:0] out_data;
  int checks = 0, failures = 0;
  int chan_of_syn[MD], chan_of_cw[NQ];
  logic [NQ-1:0] exp_q[$]; item_kind_e kind_q[$];

  syndrome_mapping #(.NCH(NCH), .L_BB(L), .M_BB(M)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random back-pressure and checking
  always @(negedge clk) out_ready <= ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    logic [NQ-1:0] e; item_kind_e k;
    e = exp_q.pop_front(); k = kind_q.pop_front();
    checks++;
    if (out_kind != k || out_data != e) begin
      failures++; $display("item kind %0d/%0d data mismatch", out_kind, k);
    end
  end

  task automatic beat(int ch, bit b, bit en);
    rd_valid = 1; rd_chan = 7'(ch); rd_bit = b; rd_end = en;
    do @(posedge clk); while (!rd_ready);
    #1 rd_valid = 0; rd_end = 0;
  endtask

  initial begin
    int perm[NCH];
    for (int c = 0; c < NCH; c++) perm[c] = c;
    perm.shuffle();
    for (int i = 0; i < MD; i++) chan_of_syn[i] = perm[i];
    for (int q = 0; q < NQ; q++) chan_of_cw[q] = perm[MD + q];
    repeat (2) @(posedge clk); rst_n = 1;
    for (int c = 0; c < NCH; c++) begin
      @(negedge clk); tbl_we = 1; tbl_addr = 7'(c); tbl_data = '0;
      for (int i = 0; i < MD; i++) if (perm[i] == c) tbl_data = {2'd1, IDX_W'(i)};
      for (int q = 0; q < NQ; q++) if (perm[MD+q] == c) tbl_data = {2'd2, IDX_W'(q)};
    end
    @(negedge clk); tbl_we = 0;
    for (int r = 0; r < 12; r++) begin
      logic [NQ-1:0] v; int order[];
      bit is_cw = (r == 10);
      int n = is_cw ? NQ : MD;
      v = '0;
      for (int i = 0; i < n; i++) v[i] = 1'($urandom_range(0, 1));
      order = new[n];
      for (int i = 0; i < n; i++) order[i] = i;
      order.shuffle();
      exp_q.push_back(v); kind_q.push_back(is_cw ? ITEM_CW : ITEM_SYND);
      for (int i = 0; i < n; i++) begin
        if ($urandom_range(0, 9) == 0) beat(perm[NCH-1], 1'b1, 1'b0); // unused channel
        beat(is_cw ? chan_of_cw[order[i]] : chan_of_syn[order[i]], v[order[i]], 1'b0);
      end
    end
    exp_q.push_back('0); kind_q.push_back(ITEM_END);
    beat(0, 1'b0, 1'b1);
    repeat (20) @(posedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("%0d items missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
