// bw_update -- "bias & weight update" of online learning: turns probability
// traces into the Bayesian-Hebbian bias and weights,
//   b_j  = ln p_j
//   w_ij = ln( p_ij / (p_i * p_j) ) = ln p_ij - ln p_i - ln p_j .
//
// A beat either asks for the LANES biases of a group (in_bias = 1, only in_pj
// is used) or for the LANES weights from one pre-synaptic MCU (traces in_pij,
// the pre trace in_pi, post traces in_pj). The logarithms use the
// approximation of bcpnn_pkg::fxp_ln; the difference is saturated to Q3.12
// ([-8, 8)), which bounds both weights and biases. The updated traces in_pij
// pass through unchanged on out_p so that the caller can write both the
// traces and the new weights from one beat. One pipeline register: latency
// one cycle, one beat per cycle, USER_W bits of side information carried
// along. Writing the log-difference form is this design's choice; it avoids
// a divider.
module bw_update
  import bcpnn_pkg::*;
#(
  parameter int USER_W = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic              in_bias,
  input  fxp_lanes_t        in_pij,
  input  fxp_t              in_pi,
  input  fxp_lanes_t        in_pj,
  input  logic [USER_W-1:0] in_user,
  output logic              out_valid,
  input  logic              out_ready,
  output fxp_lanes_t        out_w,
  output fxp_lanes_t        out_p,
  output logic [USER_W-1:0] out_user
);
  fxp_t ln_pi;
  assign ln_pi    = fxp_ln(in_pi);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_w     <= '0;
      out_p     <= '0;
      out_user  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int l = 0; l < LANES; l++) begin
          if (in_bias) out_w[l] <= fxp_ln(in_pj[l]);
          else         out_w[l] <= sat16(acc_t'(fxp_ln(in_pij[l])) - acc_t'(ln_pi)
                                         - acc_t'(fxp_ln(in_pj[l])));
        end
        out_p    <= in_pij;
        out_user <= in_user;
      end
    end
  end
endmodule
