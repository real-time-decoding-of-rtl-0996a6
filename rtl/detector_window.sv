// detector_window: detector formation and window buffer of the sliding-
// window decoder.
//
// Items from the syndrome mapping are turned into one detector row each:
//   ITEM_SYND  d = s xor s_prev (difference with the previous round,
//              s_prev starts at zero);
//   ITEM_CW    the final "noiseless" syndrome H c is computed from the
//              data-qubit codeword c and d = s_prev xor H c; c is also
//              passed to the Pauli-frame block (cw_valid/cw);
//   ITEM_END   d = 0 (flushes the last windows).
// Rows are appended to a circular detector history of DEPTH rows (storage
// rounded up to a power of two, the fill limit is DEPTH). When at
// least W rows from the window start t are present, the window
// D[t .. t+W-1] is offered (win_valid) with the carried detector
// correction u xor-ed into its first cycle. win_ack slides the start by the
// commit width C and stores the next carry u_next. The input is stalled
// while the history is full (back-pressure). The detector rule, the carry
// and the slide follow the published sliding-window algorithm; the history
// depth and the handshake are this design's choices.
//
// Timing: a row is stored the cycle its item is accepted; win_valid and
// win_det are combinational from the history.
//
// Lint note: rst_n is both the asynchronous reset of the flops and the
// disable condition of the assertions, which a linter reports as a reset
// used synchronously and asynchronously; the assertions are not logic.
module detector_window
  import relay_pkg::*;
#(
  parameter int L_BB  = 12,
  parameter int M_BB  = 6,
  parameter int W     = 12,
  parameter int DEPTH = 16,
  localparam int MD   = md_f(L_BB, M_BB),
  localparam int NQ   = nq_f(L_BB, M_BB),
  localparam int P_W  = $clog2(DEPTH) + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,      // new experiment: empty the history
  input  logic              in_valid,
  output logic              in_ready,
  input  item_kind_e        in_kind,
  input  logic [NQ-1:0]     in_data,
  output logic              cw_valid,
  output logic [NQ-1:0]     cw,
  output logic              win_valid,
  output logic [W*MD-1:0]   win_det,
  input  logic              win_ack,
  input  logic [3:0]        commit,
  input  logic [MD-1:0]     u_next,
  output logic [P_W-1:0]    fill
);
  logic [MD-1:0] hist [1 << (P_W - 1)];   // storage rounded up to a power of two
  logic [MD-1:0] s_prev, u, d, s_new, s_final;
  logic [P_W-1:0] wr, rd;

  // noiseless final syndrome H c
  for (genvar k = 0; k < MD; k++) begin : g_hc
    logic [5:0] b;
    for (genvar s = 0; s < 6; s++) begin : g_s
      assign b[s] = in_data[code_chk_q(L_BB, M_BB, k, s)];
    end
    assign s_final[k] = ^b;
  end

  always_comb begin
    unique case (in_kind)
      ITEM_SYND: begin s_new = in_data[MD-1:0]; d = s_new ^ s_prev; end
      ITEM_CW:   begin s_new = s_final;         d = s_new ^ s_prev; end
      default:   begin s_new = s_prev;          d = '0;             end
    endcase
  end

  assign fill     = wr - rd;
  assign in_ready = (fill < P_W'(DEPTH));
  wire   take     = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (take) hist[wr[P_W-2:0]] <= d;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr <= '0; rd <= '0; s_prev <= '0; u <= '0; cw_valid <= 1'b0; cw <= '0;
    end else if (clear) begin
      wr <= '0; rd <= '0; s_prev <= '0; u <= '0; cw_valid <= 1'b0;
    end else begin
      cw_valid <= take && (in_kind == ITEM_CW);
      if (take) begin
        wr <= wr + 1'b1;
        s_prev <= s_new;
        if (in_kind == ITEM_CW) cw <= in_data;
      end
      if (win_ack && win_valid) begin
        rd <= rd + P_W'(commit);
        u  <= u_next;
      end
    end
  end

  assign win_valid = (fill >= P_W'(W));
  for (genvar c = 0; c < W; c++) begin : g_win
    logic [P_W-1:0] a;
    assign a = rd + P_W'(c);
    if (c == 0) begin : g_first
      assign win_det[c*MD +: MD] = hist[a[P_W-2:0]] ^ u;
    end else begin : g_rest
      assign win_det[c*MD +: MD] = hist[a[P_W-2:0]];
    end
  end

  a_commit: assert property (@(posedge clk) disable iff (!rst_n)
    win_ack |-> (commit >= 4'd1) && (int'(commit) < W));
endmodule
