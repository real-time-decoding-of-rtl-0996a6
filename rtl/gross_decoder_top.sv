// gross_decoder_top: one X (or Z) decoder of the gross-code memory
// experiment, i.e. the logic of the decoder FPGA.
//
// Readout bits arrive on a per-channel stream (the serial-link receiver is
// outside this module); syndrome_mapping reorders them into syndrome rounds
// and the final codeword; windowing_decoder forms detectors, decodes
// (W = 12, C run-time) windows with the fully parallel Relay-BP core and
// accumulates the logical Pauli frame; every window's frame update leaves
// on df_valid/df (towards the serial-link transmitter) and the corrected
// logical observables on obs once the experiment has ended. regs_trace
// holds the configuration, statistics and the event trace behind a simple
// register bus.
//
// Default size: the [[144,12,12]] gross code (l = 12, m = 6: 72 checks and
// 144 data qubits per cycle, 12 logical qubits), window W = 12 cycles,
// 4-bit + sign messages: 2592 VNUs and 864 CNUs. One clock domain.
//
// Ending an experiment: after the codeword channels, send W-1 beats with
// rd_end = 1 so the last windows can be formed; obs_valid then rises.
//
// Lint note: rst_n is both the asynchronous reset of the flops and the
// disable condition of the assertions in the sub-blocks, which a linter
// reports as a reset used synchronously and asynchronously; the assertions
// are not logic.
module gross_decoder_top
  import relay_pkg::*;
#(
  parameter int L_BB  = 12,
  parameter int M_BB  = 6,
  parameter int W     = 12,
  parameter int K     = 12,
  parameter int NCH   = 256,
  parameter int DEPTH = 16,
  localparam int NQ   = nq_f(L_BB, M_BB),
  localparam int IDX_W = $clog2(NQ)
) (
  input  logic            clk,
  input  logic            rst_n,
  // register bus
  input  logic            reg_we,
  input  logic            reg_re,
  input  logic [15:0]     reg_addr,
  input  logic [31:0]     reg_wdata,
  output logic [31:0]     reg_rdata,
  output logic            reg_rvalid,
  // readout stream from the serial link
  input  logic            rd_valid,
  output logic            rd_ready,
  input  logic [7:0]      rd_chan,
  input  logic            rd_bit,
  input  logic            rd_end,
  // logical Pauli frame updates and observables to the serial link
  output logic            df_valid,
  output logic [K-1:0]    df,
  output logic [K-1:0]    frame,
  output logic            obs_valid,
  output logic [K-1:0]    obs
);
  logic clear, tbl_we;
  logic [3:0] commit;
  logic [IT_W-1:0] t0_max, tr_max, r_max, s_max, last_legs;
  logic [BETA_W-1:0] beta0, beta_min, beta_max;
  logic [MAG_W-1:0] prior_data, prior_meas;
  logic [K-1:0][NQ-1:0] lmat;
  logic [7:0] tbl_addr;
  logic [IDX_W+1:0] tbl_data;
  logic [31:0] n_windows, n_converged, n_iters;
  logic ev_dec_start, ev_dec_done;
  logic it_valid, it_ready;
  item_kind_e it_kind;
  logic [NQ-1:0] it_data;
  logic [5:0] events;

  regs_trace #(.NQ(NQ), .K(K), .TBL_W(IDX_W + 2), .EV_N(6)) u_regs (
    .clk, .rst_n, .reg_we, .reg_re, .reg_addr, .reg_wdata, .reg_rdata, .reg_rvalid,
    .clear, .commit, .t0_max, .tr_max, .r_max, .s_max, .beta0, .beta_min, .beta_max,
    .prior_data, .prior_meas, .lmat, .tbl_we, .tbl_addr, .tbl_data,
    .n_windows, .n_converged, .n_iters, .events
  );

  syndrome_mapping #(.NCH(NCH), .L_BB(L_BB), .M_BB(M_BB)) u_map (
    .clk, .rst_n, .tbl_we, .tbl_addr($clog2(NCH)'(tbl_addr)), .tbl_data,
    .rd_valid, .rd_ready, .rd_chan($clog2(NCH)'(rd_chan)), .rd_bit, .rd_end,
    .out_valid(it_valid), .out_ready(it_ready), .out_kind(it_kind), .out_data(it_data)
  );

  windowing_decoder #(.L_BB(L_BB), .M_BB(M_BB), .W(W), .K(K), .DEPTH(DEPTH)) u_wdec (
    .clk, .rst_n, .clear, .commit, .t0_max, .tr_max, .r_max, .s_max,
    .beta0, .beta_min, .beta_max, .prior_data, .prior_meas, .lmat,
    .in_valid(it_valid), .in_ready(it_ready), .in_kind(it_kind), .in_data(it_data),
    .df_valid, .df, .frame, .obs_valid, .obs,
    .n_windows, .n_converged, .n_iters, .ev_dec_start, .ev_dec_done, .last_legs
  );

  wire take = it_valid && it_ready;
  assign events = {obs_valid, df_valid, ev_dec_done, ev_dec_start,
                   take && it_kind == ITEM_CW, take && it_kind == ITEM_SYND};
endmodule
