// syndrome_mapping: maps readout channels onto syndrome and codeword bits.
//
// The readout stream delivers one measured bit per beat together with the
// number of the readout channel that produced it. A table, written through
// the register interface, says for each channel whether it carries a check
// (syndrome) bit or a data-qubit (codeword) bit, and its index in the
// decoder's order:
//     entry = {kind[1:0], index[IDX_W-1:0]}, kind 0 = unused,
//             1 = syndrome bit, 2 = codeword bit.
// Bits are collected until every bit of a syndrome round (MD bits) or of
// the final codeword (NQ bits) has arrived; the complete item is then
// offered downstream (out_valid/out_ready) as ITEM_SYND or ITEM_CW. A beat
// with rd_end = 1 emits an ITEM_END marker. The input is stalled
// (rd_ready = 0) while an item waits for the downstream handshake. The
// table-driven reordering follows the decoder's syndrome-mapping stage; the
// entry format, the "all bits arrived" rule and the stall are this design's.
//
// Timing: an item is offered the cycle after its last bit is accepted.
//
// Lint note: rst_n is both the asynchronous reset of the flops and the
// disable condition of the assertions, which a linter reports as a reset
// used synchronously and asynchronously; the assertions are not logic.
module syndrome_mapping
  import relay_pkg::*;
#(
  parameter int NCH  = 256,
  parameter int L_BB = 12,
  parameter int M_BB = 6,
  localparam int MD  = md_f(L_BB, M_BB),
  localparam int NQ  = nq_f(L_BB, M_BB),
  localparam int CH_W  = $clog2(NCH),
  localparam int IDX_W = $clog2(NQ)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // table write port
  input  logic                 tbl_we,
  input  logic [CH_W-1:0]      tbl_addr,
  input  logic [IDX_W+1:0]     tbl_data,
  // readout stream
  input  logic                 rd_valid,
  output logic                 rd_ready,
  input  logic [CH_W-1:0]      rd_chan,
  input  logic                 rd_bit,
  input  logic                 rd_end,
  // item stream
  output logic                 out_valid,
  input  logic                 out_ready,
  output item_kind_e           out_kind,
  output logic [NQ-1:0]        out_data
);
  logic [IDX_W+1:0] tbl [NCH];
  logic [MD-1:0] syn_buf, syn_got;
  logic [NQ-1:0] cw_buf, cw_got;

  always_ff @(posedge clk) begin
    if (tbl_we) tbl[tbl_addr] <= tbl_data;
  end

  logic [1:0]       e_kind;
  logic [IDX_W-1:0] e_idx;
  assign e_kind = tbl[rd_chan][IDX_W+1:IDX_W];
  assign e_idx  = tbl[rd_chan][IDX_W-1:0];
  assign rd_ready = !out_valid;
  wire   take     = rd_valid && rd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      syn_buf <= '0; syn_got <= '0; cw_buf <= '0; cw_got <= '0;
      out_valid <= 1'b0; out_kind <= ITEM_SYND; out_data <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take && rd_end) begin
        out_valid <= 1'b1; out_kind <= ITEM_END; out_data <= '0;
      end else if (take && e_kind == 2'd1 && int'(e_idx) < MD) begin
        if ((syn_got | (MD'(1) << e_idx)) == '1) begin
          out_valid <= 1'b1; out_kind <= ITEM_SYND;
          out_data  <= NQ'(syn_buf | (MD'(rd_bit) << e_idx));
          syn_got   <= '0; syn_buf <= '0;
        end else begin
          syn_got[e_idx] <= 1'b1; syn_buf[e_idx] <= rd_bit;
        end
      end else if (take && e_kind == 2'd2) begin
        if ((cw_got | (NQ'(1) << e_idx)) == '1) begin
          out_valid <= 1'b1; out_kind <= ITEM_CW;
          out_data  <= cw_buf | (NQ'(rd_bit) << e_idx);
          cw_got    <= '0; cw_buf <= '0;
        end else begin
          cw_got[e_idx] <= 1'b1; cw_buf[e_idx] <= rd_bit;
        end
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data) && $stable(out_kind));
endmodule
