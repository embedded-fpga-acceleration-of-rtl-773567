// trace_update -- "traces update" stage of online learning: one pipeline
// step that moves LANES joint probability traces towards the current
// co-activation, p_ij <- p_ij + alpha * (x_i * y_j - p_ij).
//
// A beat holds the traces p_ij of one pre-synaptic MCU i (activity in_x)
// and LANES post-synaptic MCUs j (activities in_y). The result is
// registered, so the stage has a latency of one cycle and accepts one beat
// per cycle; in_ready follows the usual rule of a one-deep pipeline register
// (free, or being emptied this cycle). USER_W bits of side information travel
// with the beat unchanged so that later stages can use it. All values are
// Q3.12; alpha is the learning rate set by the host (the original derives it
// from the trace time constant tau_p). Saturation at the Q3.12 limits is
// this design's choice; for probabilities it never triggers.
module trace_update
  import bcpnn_pkg::*;
#(
  parameter int USER_W = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  fxp_t              alpha,
  input  logic              in_valid,
  output logic              in_ready,
  input  fxp_lanes_t        in_p,
  input  fxp_t              in_x,
  input  fxp_lanes_t        in_y,
  input  logic [USER_W-1:0] in_user,
  output logic              out_valid,
  input  logic              out_ready,
  output fxp_lanes_t        out_p,
  output logic [USER_W-1:0] out_user
);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_p     <= '0;
      out_user  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int l = 0; l < LANES; l++)
          out_p[l] <= trace_step(in_p[l], fxp_mul(in_x, in_y[l]), alpha);
        out_user <= in_user;
      end
    end
  end
endmodule
