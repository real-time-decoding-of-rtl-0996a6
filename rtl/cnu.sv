// cnu: check node unit of the fully parallel Relay-BP decoder.
//
// One CNU serves one row i of the windowed check matrix. From the incoming
// error-to-check messages nu (sign + magnitude) and the detector value
// sigma_i it computes, in one clock cycle:
//   * the XOR tree of all signs and sigma_i, and from it the exclusive
//     parity of every edge: mu_s[j] = sigma_i ^ XOR_{j' != j} nu_s[j'];
//   * a dual-minimum finder: the smallest and second smallest magnitude and
//     the edge that holds the smallest (selector mu_c[j] = 1 on that edge).
// The exclusive minimum itself is left to the receiving VNU, which picks
// min2 where c = 1 and min1 elsewhere. Both minima are scaled by the
// min-sum factor alpha = 1 - 2^-t as min - (min >> t), t = t_iter.
// Edges flagged absent in VALID (the check's degree is below DC) are
// ignored. The split into parity, dual minimum and deferred exclusive
// minimum follows the decoder's published CNU; the register at the output,
// the first-edge tie break and the shift form of alpha are choices made here.
//
// Timing: outputs are registered and update on the clock edge where en = 1.
module cnu
  import relay_pkg::*;
#(
  parameter int          D     = DC,
  parameter logic [D-1:0] VALID = '1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic [4:0]            t_iter,
  input  logic                  sigma,
  input  vmsg_t [D-1:0]         nu,
  output logic  [D-1:0]         mu_s,
  output logic  [D-1:0]         mu_c,
  output logic  [MAG_W-1:0]     min1,
  output logic  [MAG_W-1:0]     min2
);
  logic             par;
  logic [MAG_W-1:0] m1, m2;
  int               idx;

  always_comb begin
    par = sigma;
    for (int j = 0; j < D; j++) if (VALID[j]) par ^= nu[j].s;
  end

  // dual minimum finder
  always_comb begin
    m1  = MAXMAG[MAG_W-1:0];
    m2  = MAXMAG[MAG_W-1:0];
    idx = -1;
    for (int j = 0; j < D; j++) begin
      if (VALID[j]) begin
        if (nu[j].m < m1) begin
          m2  = m1;
          m1  = nu[j].m;
          idx = j;
        end else if (nu[j].m < m2) begin
          m2 = nu[j].m;
        end
      end
    end
  end

  // idx stays -1 only when every magnitude is MAXMAG: then m1 = m2 and the
  // selector choice does not matter; pick the first valid edge.
  function automatic int first_valid();
    for (int j = 0; j < D; j++) if (VALID[j]) return j;
    return 0;
  endfunction
  localparam int FIRST = first_valid();

  logic [MAG_W-1:0] a1, a2;
  assign a1 = m1 - (m1 >> t_iter);
  assign a2 = m2 - (m2 >> t_iter);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mu_s <= '0;
      mu_c <= '0;
      min1 <= '0;
      min2 <= '0;
    end else if (en) begin
      for (int j = 0; j < D; j++) begin
        mu_s[j] <= VALID[j] & (par ^ nu[j].s);
        mu_c[j] <= (idx < 0) ? (j == FIRST) : (j == idx);
      end
      min1 <= a1;
      min2 <= a2;
    end
  end
endmodule
