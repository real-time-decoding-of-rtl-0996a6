// window_ctrl: decoder controller of the sliding-window decoder.
//
// Runs the window loop: when the detector window reports a full window
// (win_valid) it starts the Relay-BP decoder (dec_start, one cycle), waits
// for dec_done, and then in one commit cycle acknowledges the window (the
// detector buffer slides by C and takes the new carry), and strobes the
// Pauli-frame update (frame_upd), both from the committed part of the
// decoder's best estimate. A decode that found no solution still commits
// its estimate (all zeros then). The window stays stable while the decoder
// runs because new detector rows are written behind it.
// It also counts decoder invocations, converged invocations and the total
// of BP iterations for the statistics registers; clear zeroes them.
//
// Timing: dec_start follows win_valid by one clock; the commit cycle is the
// clock after dec_done.
//
// Lint note: rst_n is both the asynchronous reset of the flops and the
// disable condition of the assertions, which a linter reports as a reset
// used synchronously and asynchronously; the assertions are not logic.
module window_ctrl
  import relay_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic            win_valid,
  output logic            win_ack,
  output logic            dec_start,
  input  logic            dec_done,
  input  logic            dec_success,
  input  logic [IT_W-1:0] dec_iters,
  output logic            frame_upd,
  output logic            idle,
  output logic [31:0]     n_windows,
  output logic [31:0]     n_converged,
  output logic [31:0]     n_iters
);
  typedef enum logic [1:0] {W_IDLE, W_START, W_RUN, W_COMMIT} wstate_e;
  wstate_e st;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= W_IDLE; n_windows <= '0; n_converged <= '0; n_iters <= '0;
    end else begin
      if (clear) begin
        n_windows <= '0; n_converged <= '0; n_iters <= '0;
      end
      unique case (st)
        W_IDLE:   if (win_valid) st <= W_START;
        W_START:  st <= W_RUN;
        W_RUN:    if (dec_done) begin
          st <= W_COMMIT;
          n_windows <= n_windows + 1;
          n_iters   <= n_iters + 32'(dec_iters);
          if (dec_success) n_converged <= n_converged + 1;
        end
        W_COMMIT: st <= W_IDLE;
        default:  st <= W_IDLE;
      endcase
    end
  end

  assign dec_start = (st == W_START);
  assign win_ack   = (st == W_COMMIT);
  assign frame_upd = (st == W_COMMIT);
  assign idle      = (st == W_IDLE);

  a_ack_valid: assert property (@(posedge clk) disable iff (!rst_n) win_ack |-> win_valid);
endmodule
