// softmax_unit -- "activity (softmax)": soft winner-take-all normalisation of
// the supports of one hypercolumn into minicolumn activities,
//   y_j = exp(s_j - s_max) / sum_k exp(s_k - s_max),
// so the activities of an HCU are positive and sum to one.
//
// The supports of one HCU arrive as n_beats beats of LANES values (Q19.12);
// only the first n_mcu values count, the rest of the last beat is padding and
// gets activity 0. The unit works on one HCU at a time in four phases:
//   COLLECT  store the n_beats input beats, track the largest valid support;
//   EXP      one beat per cycle: e_j = exp(s_j - s_max) (bcpnn_pkg::fxp_exp_neg,
//            LANES exponential units), accumulate their sum;
//   DIV      restoring division, one quotient bit per cycle, for the
//            reciprocal r = 2^24 / sum (Q3.12); the sum is at least 1.0
//            because the winner contributes exp(0);
//   EMIT     one beat per cycle: y_j = e_j * r, out_last on the final beat.
// From the first input beat of an HCU to its last output beat takes
// 3*n_beats + 24 cycles (collect, exponentials, 25 divider steps, emit), and
// input is refused (in_ready low) outside COLLECT, which is the
// stall that upstream stages see. Subtracting the maximum and the
// reciprocal-multiply structure are this design's choice; the source only
// names a softmax.
module softmax_unit
  import bcpnn_pkg::*;
#(
  parameter int MAX_MCU = 128
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] n_beats,   // beats per HCU, 1 .. MAX_MCU/LANES rounded up
  input  logic [15:0] n_mcu,    // valid MCUs per HCU
  input  logic       in_valid,
  output logic       in_ready,
  input  acc_lanes_t in_s,
  output logic       out_valid,
  input  logic       out_ready,
  output fxp_lanes_t out_y,
  output logic       out_last
);
  localparam int NB = (MAX_MCU + LANES - 1) / LANES;
  localparam int BW = (NB > 1) ? $clog2(NB) : 1;

  typedef enum logic [1:0] {COLLECT, EXP, DIV, EMIT} state_t;
  state_t state;

  acc_lanes_t sbuf [NB];
  fxp_lanes_t ebuf [NB];
  logic [BW-1:0] beat;
  acc_t          smax;
  logic [31:0]   sum;
  logic [47:0]   rem;
  logic [24:0]   quo;
  logic [4:0]    dcnt;
  logic [31:0]   recip;

  function automatic logic lane_ok(input logic [BW-1:0] b, input int l, input logic [15:0] n);
    return (32'(b) * LANES + 32'(l)) < 32'(n);
  endfunction

  // beat-wide maximum of the valid lanes of the incoming beat
  acc_t in_max;
  logic in_any;
  always_comb begin
    in_max = smax;
    in_any = 1'b0;
    for (int l = 0; l < LANES; l++)
      if (lane_ok(beat, l, n_mcu) && (in_s[l] > in_max || (beat == '0 && !in_any))) begin
        in_max = in_s[l];
        in_any = 1'b1;
      end
  end

  fxp_lanes_t e_now;
  logic [31:0] e_sum;
  always_comb begin
    e_sum = '0;
    for (int l = 0; l < LANES; l++) begin
      e_now[l] = lane_ok(beat, l, n_mcu) ? fxp_exp_neg(sbuf[beat][l] - smax) : '0;
      e_sum    = e_sum + 32'(e_now[l]);
    end
  end

  assign in_ready  = (state == COLLECT);
  assign out_valid = (state == EMIT);
  assign out_last  = (state == EMIT) && (beat == BW'(n_beats - 1'b1));
  always_comb begin
    for (int l = 0; l < LANES; l++)
      out_y[l] = sat16(acc_t'((64'(ebuf[beat][l]) * 64'(recip)) >> FRAC));
  end

  // restoring divider step
  logic [47:0] rem_sh;
  assign rem_sh = {rem[46:0], 1'b0};

  always_ff @(posedge clk) begin
    if (state == COLLECT && in_valid) sbuf[beat] <= in_s;
    if (state == EXP) ebuf[beat] <= e_now;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= COLLECT;
      beat  <= '0;
      smax  <= '0;
      sum   <= '0;
      rem   <= '0;
      quo   <= '0;
      dcnt  <= '0;
      recip <= '0;
    end else begin
      unique case (state)
        COLLECT: if (in_valid) begin
          smax <= in_max;
          if (beat == BW'(n_beats - 1'b1)) begin
            beat  <= '0;
            sum   <= '0;
            state <= EXP;
          end else beat <= beat + 1'b1;
        end
        EXP: begin
          sum <= sum + e_sum;
          if (beat == BW'(n_beats - 1'b1)) begin
            beat  <= '0;
            rem   <= '0;
            quo   <= 25'h1000000;   // dividend 2^24, shifted out MSB first
            dcnt  <= 5'd25;
            state <= DIV;
          end else beat <= beat + 1'b1;
        end
        DIV: begin
          // shift the next dividend bit in, subtract when possible
          if ({rem_sh[47:1], quo[24]} >= 48'(sum)) begin
            rem <= {rem_sh[47:1], quo[24]} - 48'(sum);
            quo <= {quo[23:0], 1'b1};
          end else begin
            rem <= {rem_sh[47:1], quo[24]};
            quo <= {quo[23:0], 1'b0};
          end
          dcnt <= dcnt - 1'b1;
          if (dcnt == 5'd1) state <= EMIT;
        end
        EMIT: begin
          if (out_ready) begin
            if (beat == BW'(n_beats - 1'b1)) begin
              beat  <= '0;
              state <= COLLECT;
            end else beat <= beat + 1'b1;
          end
        end
      endcase
      if (state == DIV && dcnt == 5'd1) begin
        // final quotient bit is decided this cycle
        recip <= 32'({quo[23:0], ({rem_sh[47:1], quo[24]} >= 48'(sum))});
      end
    end
  end
endmodule
