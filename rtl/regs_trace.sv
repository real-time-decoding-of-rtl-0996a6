// regs_trace: register interface and trace recorder of the decoder.
//
// A simple synchronous register bus (reg_we / reg_re, word address,
// 32-bit data, read data one clock after reg_re with reg_rvalid) holds the
// run-time configuration of the windowing decoder, exposes its statistics,
// forwards writes to the syndrome-mapping table and reads back the trace.
//
// Address map (word addresses):
//   0x0000 ID        RO  0x52425031
//   0x0001 CTRL      WO  bit 0: clear (one-cycle pulse: new experiment)
//   0x0002 COMMIT    RW  commit width C          reset 8
//   0x0003 T0        RW  first-leg iterations    reset 80
//   0x0004 TR        RW  later-leg iterations    reset 60
//   0x0005 R         RW  relay legs              reset 600
//   0x0006 S         RW  solutions sought        reset 1
//   0x0007 BETA0     RW  (1-gamma_0)*8           reset 7  (gamma_0 = 0.125)
//   0x0008 BETA_MIN  RW                          reset 3  (gamma = 0.66)
//   0x0009 BETA_MAX  RW                          reset 10 (gamma = -0.24)
//   0x000A PRIOR_D   RW  data-qubit error prior  reset 14
//   0x000B PRIOR_M   RW  measurement error prior reset 14
//   0x0010 N_WINDOWS RO  decoder invocations
//   0x0011 N_CONV    RO  converged invocations
//   0x0012 N_ITERS   RO  total BP iterations
//   0x0013 TRACE_CNT RO  trace entries recorded
//   0x0014 TIME      RO  free-running clock counter
//   0x0100 + k*LW + w    L matrix row k, bits 32w .. 32w+31 (LW = ceil(NQ/32))
//   0x1000 + ch      WO  syndrome-mapping table entry of channel ch
//   0x2000 + n       RO  trace entry n = {time[31-EV_N:0], events[EV_N-1:0]}
// The trace recorder stores one time-stamped entry per clock in which any
// event input is high, until TRACE_DEPTH entries; clear empties it.
// Register contents and the trace are what the decoder's register and
// trace blocks are described as providing; the bus, the address map and
// the reset values of C and of the priors are this design's choices (the
// iteration, leg and memory-strength resets are the published settings).
module regs_trace
  import relay_pkg::*;
#(
  parameter int NQ          = 144,
  parameter int K           = 12,
  parameter int TBL_W       = 10,
  parameter int EV_N        = 6,
  parameter int TRACE_DEPTH = 64,
  localparam int LW         = (NQ + 31) / 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 reg_we,
  input  logic                 reg_re,
  input  logic [15:0]          reg_addr,
  input  logic [31:0]          reg_wdata,
  output logic [31:0]          reg_rdata,
  output logic                 reg_rvalid,
  // configuration out
  output logic                 clear,
  output logic [3:0]           commit,
  output logic [IT_W-1:0]      t0_max,
  output logic [IT_W-1:0]      tr_max,
  output logic [IT_W-1:0]      r_max,
  output logic [IT_W-1:0]      s_max,
  output logic [BETA_W-1:0]    beta0,
  output logic [BETA_W-1:0]    beta_min,
  output logic [BETA_W-1:0]    beta_max,
  output logic [MAG_W-1:0]     prior_data,
  output logic [MAG_W-1:0]     prior_meas,
  output logic [K-1:0][NQ-1:0] lmat,
  output logic                 tbl_we,
  output logic [7:0]           tbl_addr,
  output logic [TBL_W-1:0]     tbl_data,
  // statistics and events in
  input  logic [31:0]          n_windows,
  input  logic [31:0]          n_converged,
  input  logic [31:0]          n_iters,
  input  logic [EV_N-1:0]      events
);
  localparam int TD_W = $clog2(TRACE_DEPTH);
  logic [K-1:0][LW*32-1:0] lwords;
  logic [31:0] trace_mem [TRACE_DEPTH];
  logic [TD_W:0] trace_cnt;
  logic [31:0] now;

  for (genvar k = 0; k < K; k++) begin : g_l
    assign lmat[k] = lwords[k][NQ-1:0];
  end

  assign tbl_we   = reg_we && (reg_addr[15:12] == 4'h1);
  assign tbl_addr = reg_addr[7:0];
  assign tbl_data = reg_wdata[TBL_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clear <= 1'b0; commit <= 4'd8; t0_max <= 16'd80; tr_max <= 16'd60;
      r_max <= 16'd600; s_max <= 16'd1; beta0 <= 5'd7; beta_min <= 5'd3;
      beta_max <= 5'd10; prior_data <= 4'd14; prior_meas <= 4'd14; lwords <= '0;
      now <= '0;
    end else begin
      now   <= now + 1;
      clear <= reg_we && (reg_addr == 16'h0001) && reg_wdata[0];
      if (reg_we) begin
        unique case (reg_addr)
          16'h0002: commit     <= reg_wdata[3:0];
          16'h0003: t0_max     <= reg_wdata[IT_W-1:0];
          16'h0004: tr_max     <= reg_wdata[IT_W-1:0];
          16'h0005: r_max      <= reg_wdata[IT_W-1:0];
          16'h0006: s_max      <= reg_wdata[IT_W-1:0];
          16'h0007: beta0      <= reg_wdata[BETA_W-1:0];
          16'h0008: beta_min   <= reg_wdata[BETA_W-1:0];
          16'h0009: beta_max   <= reg_wdata[BETA_W-1:0];
          16'h000A: prior_data <= reg_wdata[MAG_W-1:0];
          16'h000B: prior_meas <= reg_wdata[MAG_W-1:0];
          default: ;
        endcase
        for (int k = 0; k < K; k++)
          for (int w = 0; w < LW; w++)
            if (int'(reg_addr) == 'h100 + k * LW + w) lwords[k][w*32 +: 32] <= reg_wdata;
      end
    end
  end

  // trace recorder
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) trace_cnt <= '0;
    else if (clear) trace_cnt <= '0;
    else if (|events && trace_cnt < (TD_W+1)'(TRACE_DEPTH)) trace_cnt <= trace_cnt + 1'b1;
  end
  always_ff @(posedge clk) begin
    if (|events && trace_cnt < (TD_W+1)'(TRACE_DEPTH))
      trace_mem[trace_cnt[TD_W-1:0]] <= {now[31-EV_N:0], events};
  end

  // read port
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_rvalid <= 1'b0; reg_rdata <= '0;
    end else begin
      reg_rvalid <= reg_re;
      if (reg_re) begin
        reg_rdata <= '0;
        unique case (reg_addr)
          16'h0000: reg_rdata <= 32'h5242_5031;
          16'h0002: reg_rdata <= 32'(commit);
          16'h0003: reg_rdata <= 32'(t0_max);
          16'h0004: reg_rdata <= 32'(tr_max);
          16'h0005: reg_rdata <= 32'(r_max);
          16'h0006: reg_rdata <= 32'(s_max);
          16'h0007: reg_rdata <= 32'(beta0);
          16'h0008: reg_rdata <= 32'(beta_min);
          16'h0009: reg_rdata <= 32'(beta_max);
          16'h000A: reg_rdata <= 32'(prior_data);
          16'h000B: reg_rdata <= 32'(prior_meas);
          16'h0010: reg_rdata <= n_windows;
          16'h0011: reg_rdata <= n_converged;
          16'h0012: reg_rdata <= n_iters;
          16'h0013: reg_rdata <= 32'(trace_cnt);
          16'h0014: reg_rdata <= now;
          default: begin
            if (reg_addr[15:12] == 4'h2) reg_rdata <= trace_mem[reg_addr[TD_W-1:0]];
            for (int k = 0; k < K; k++)
              for (int w = 0; w < LW; w++)
                if (int'(reg_addr) == 'h100 + k * LW + w) reg_rdata <= lwords[k][w*32 +: 32];
          end
        endcase
      end
    end
  end
endmodule
