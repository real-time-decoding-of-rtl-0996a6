// relay_ctrl: controller of the Relay-BP decoder (Relay-BP-S schedule).
//
// Sequences the CNU/VNU array through a flooding schedule with two clocks
// per BP iteration (CN phase, then VN phase) and runs the relay of DMem-BP
// legs:
//   INIT   one VN phase with init = 1: nu = M = Lambda(0) on every node,
//          RNG seeded, first leg (beta0 everywhere).
//   CN     check nodes compute mu(t) from nu(t-1), alpha index t.
//   VN     if the convergence checker (registered during the CN phase)
//          reports H e_hat(t-1) = sigma, the leg has found a solution -> SOL;
//          else if the leg has done its T iterations -> NEXT;
//          else the VN phase is executed and the iteration counted -> CN.
//   SOL    offer e_hat to the solution selector; solutions found += 1.
//   NEXT   stop after S solutions or R legs, else LEG.
//   LEG    start the next leg: nu = Lambda(0), RNG stepped (new random
//          memory strengths), marginals kept, T = Tr -> CN.
//   DONE   one-cycle done pulse, then IDLE.
// The leg limits T0 (first leg) and Tr, the leg count R and the solution
// count S are run-time inputs. A converged leg-1 estimate after 0
// iterations (sigma = 0, e_hat = 0) is accepted; in later legs the first
// check is skipped because e_hat is still the previous leg's.
//
// Timing: a decode that converges in the first leg after k iterations
// raises done 2k + 6 clock edges after the edge that samples start
// (INIT, k x (CN, VN), CN, VN, SOL, NEXT, DONE).
//
// Lint note: rst_n is both the asynchronous reset of the flops and the
// disable condition of the assertions, which a linter reports as a reset
// used synchronously and asynchronously; the assertions are not logic.
module relay_ctrl
  import relay_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            conv,
  input  logic [IT_W-1:0] t0_max,
  input  logic [IT_W-1:0] tr_max,
  input  logic [IT_W-1:0] r_max,
  input  logic [IT_W-1:0] s_max,
  output logic            busy,
  output logic            done,
  output logic            init,
  output logic            cn_en,
  output logic            vn_en,
  output logic            leg_start,
  output logic            rng_seed,
  output logic            rng_step,
  output logic            first_leg,
  output logic            cand,
  output logic            clear,
  output logic [4:0]      t_iter,
  output logic [IT_W-1:0] iters_total,
  output logic [IT_W-1:0] legs,
  output logic [IT_W-1:0] n_sol
);
  typedef enum logic [2:0] {S_IDLE, S_INIT, S_CN, S_VN, S_SOL, S_NEXT, S_LEG, S_DONE} state_e;
  state_e          st;
  logic [IT_W-1:0] it, limit;

  wire do_check = first_leg || (it != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; it <= '0; limit <= '0; iters_total <= '0; legs <= '0;
      n_sol <= '0; first_leg <= 1'b1;
    end else begin
      unique case (st)
        S_IDLE: if (start) begin
          st <= S_INIT; iters_total <= '0; legs <= 16'd1; n_sol <= '0;
          first_leg <= 1'b1; it <= '0; limit <= t0_max;
        end
        S_INIT: st <= S_CN;
        S_CN:   st <= S_VN;
        S_VN: begin
          if (conv && do_check)  st <= S_SOL;
          else if (it >= limit)  st <= S_NEXT;
          else begin
            st <= S_CN; it <= it + 1'b1; iters_total <= iters_total + 1'b1;
          end
        end
        S_SOL: begin
          n_sol <= n_sol + 1'b1; st <= S_NEXT;
        end
        S_NEXT: begin
          if (n_sol >= s_max || legs >= r_max) st <= S_DONE;
          else                                 st <= S_LEG;
        end
        S_LEG: begin
          st <= S_CN; it <= '0; limit <= tr_max; legs <= legs + 1'b1; first_leg <= 1'b0;
        end
        S_DONE: st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy      = (st != S_IDLE);
  assign done      = (st == S_DONE);
  assign init      = (st == S_INIT);
  assign clear     = (st == S_IDLE) && start;
  assign rng_seed  = (st == S_IDLE) && start;
  assign cn_en     = (st == S_CN);
  assign vn_en     = (st == S_INIT) ||
                     ((st == S_VN) && !(conv && do_check) && (it < limit));
  assign leg_start = (st == S_LEG);
  assign rng_step  = (st == S_LEG);
  assign cand      = (st == S_SOL);
  // alpha index: iteration being computed, 1-based, saturating
  assign t_iter    = (it >= 16'd30) ? 5'd31 : 5'(it + 1'b1);

  a_onehot_phase: assert property (@(posedge clk) disable iff (!rst_n) !(cn_en && vn_en));
endmodule
