// support_unit -- computes the support (input current) of LANES minicolumn
// units at once: s_j = b_j + sum_i w_ij * x_i.
//
// One group of the incoming stream belongs to LANES post-synaptic MCUs of one
// hypercolumn. Its first beat (in_first) carries their LANES biases b_j; each
// following beat carries the LANES weights w_ij of one pre-synaptic MCU i,
// together with that MCU's activity x_i on in_x, which the caller gathers
// through the sparse index list. The beat marked in_last closes the group.
// Every lane keeps a Q19.12 accumulator: on the first beat it is loaded with
// the sign-extended bias, on every other beat w*x (Q3.12 x Q3.12, truncated
// to 12 fraction bits) is added. On the last beat the finished sums are
// copied to the output register and offered on out_valid/out_ready; the
// accumulators are free for the next group in the same cycle, so the unit
// takes one beat per clock as long as the consumer keeps up (in_ready falls
// only while a finished group waits). A group of B beats leaves its result
// one cycle after its last beat.
// The same unit serves the input-to-hidden projection ("support values") and
// the hidden-to-output projection ("bias-weight support"); fixed-point
// arithmetic instead of floating point is this design's choice.
module support_unit
  import bcpnn_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  logic       in_first,   // beat holds the biases of the group
  input  logic       in_last,    // last weight beat of the group
  input  fxp_lanes_t in_w,       // LANES biases or weights
  input  fxp_t       in_x,       // pre-synaptic activity for a weight beat
  output logic       out_valid,
  input  logic       out_ready,
  output acc_lanes_t out_s
);
  acc_lanes_t acc, acc_next;

  assign in_ready = !out_valid || out_ready;

  always_comb begin
    for (int l = 0; l < LANES; l++)
      acc_next[l] = in_first ? acc_t'(in_w[l]) : acc[l] + mul_acc(in_w[l], in_x);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_s     <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        acc <= acc_next;
        if (in_last) begin
          out_s     <= acc_next;
          out_valid <= 1'b1;
        end
      end
    end
  end
endmodule
