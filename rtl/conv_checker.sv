// conv_checker: convergence checker of the Relay-BP decoder.
//
// Tests the parity-check equation H~ e_hat = sigma for the whole window:
// for every check it XORs the hard decisions of the error nodes wired to
// it (neighbours from relay_pkg) and compares with the detector. conv is
// high when every check agrees, i.e. the current estimate explains the
// syndrome. The check itself is the algorithm's stopping rule; registering
// the result (one cycle of latency, overlapped with the next CN phase) is
// this design's choice.
module conv_checker
  import relay_pkg::*;
#(
  parameter int L_BB = 12,
  parameter int M_BB = 6,
  parameter int W    = 12,
  localparam int NV  = nv_f(L_BB, M_BB, W),
  localparam int NC  = nc_f(L_BB, M_BB, W)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NV-1:0] e_hat,
  input  logic [NC-1:0] sigma,
  output logic          conv
);
  logic [NC-1:0] mismatch;
  for (genvar i = 0; i < NC; i++) begin : g_chk
    logic [DC-1:0] bits;
    for (genvar s = 0; s < DC; s++) begin : g_s
      localparam int J = chk_nbr(L_BB, M_BB, W, i, s);
      if (J >= 0) begin : g_on
        assign bits[s] = e_hat[J];
      end else begin : g_off
        assign bits[s] = 1'b0;
      end
    end
    assign mismatch[i] = (^bits) ^ sigma[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) conv <= 1'b0;
    else        conv <= ~|mismatch;
  end
endmodule
