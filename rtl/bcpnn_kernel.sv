// bcpnn_kernel -- streaming accelerator for a three-layer Bayesian Confidence
// Propagation Neural Network (input -> hidden -> output), with inference and
// optional online learning after every sample.
//
// Network. The input layer has N_IN hypercolumns (one per pixel), each with
// two minicolumns coding the intensity x and 1-x. The hidden layer has
// HID_HCU hypercolumns of HID_MCU minicolumns; every hidden HCU is connected
// to NACT active and NSIL silent input HCUs chosen by a sparse index list.
// The output layer is one HCU of OUT_MCU minicolumns (the classes), densely
// connected to all hidden MCUs. Defaults are the MNIST model: 28x28 inputs,
// 32 hidden HCUs of 128 MCUs, 64 active / 64 silent connections, 10 classes.
//
// Dataflow. All parameters live in DDR; the kernel streams them through one
// AXI4 read master (axi_burst_reader -> stream_fifo) and writes through two
// AXI4 write masters (axi_burst_writer). For each sample:
//   1. read the input record (pixels, then a label beat) into the input
//      activity buffer;
//   2. stream the input-hidden bias/weight stream through support_unit, with
//      the pre-synaptic activity of each beat looked up through the index
//      list, then softmax_unit per HCU into the hidden activity buffer;
//   3. the same for the hidden-output stream into the output activities;
//   4. write one result beat: class activities in lanes 0..OUT_MCU-1, the
//      winning class in lane 15.
// With cfg.learn set, learning follows:
//   5. unit traces p_i (input), p_j (hidden), p_k (output, target = one-hot
//      label, i.e. supervised) move towards the current activities;
//   6. for each projection, the joint traces p_ij are streamed from DDR
//      through trace_update and bw_update and written back, and the biases and
//      weights of the active connections are rewritten in the layout the
//      inference pass reads. Silent connections keep traces but no weights.
// The unit traces are kept on chip and start at 1/MCU-count when a learning
// run starts.
//
// Memory layouts (one beat = 16 Q3.12 values, 32 bytes):
//   input record  : ceil(N_IN/16) pixel beats, then a beat with the label in
//                   lane 0; records follow each other.
//   index list    : HID_HCU*(NACT+NSIL) 16-bit input-HCU numbers, active first.
//   bias/weights  : per post HCU h, per group g of 16 post MCUs: one bias
//                   beat, then one beat per pre MCU (input: per connection c
//                   < NACT, then per pre MCU m; output: per hidden HCU, per MCU).
//   joint traces  : same order without the bias beat, and for the input
//                   projection with all NACT+NSIL connections.
// Control: cfg is sampled on start; busy is high while running; done pulses
// for one cycle at the end.
//
// What follows the source: the three layers, the sparse active/silent
// connectivity, the streaming of parameters from DDR in 256-bit bursts with
// a parallel factor of 16 (the 16-bit variants), support -> softmax for each
// layer, trace updates with rate alpha, and b = ln p_j, w = ln(p_ij/(p_i p_j)).
// This design's own choices: Q3.12 fixed point throughout (the source uses
// FP32/FP16, with Q3.12 storage only in its mixed-precision variant), one
// read and two write masters instead of many, a sequential phase controller
// where the source overlaps sub-kernels in a dataflow region, the memory
// layouts above, and the on-chip unit traces. Structural rewiring of silent
// connections is not built.
module bcpnn_kernel
  import bcpnn_pkg::*;
#(
  parameter int N_IN       = 784,
  parameter int HID_HCU    = 32,
  parameter int HID_MCU    = 128,
  parameter int NACT       = 64,
  parameter int NSIL       = 64,
  parameter int OUT_MCU    = 10,
  parameter int FIFO_DEPTH = 32,
  parameter int MAX_BURST  = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // control
  input  logic        start,
  input  kernel_cfg_t cfg,
  output logic        busy,
  output logic        done,
  // AXI4 read master
  output logic        m_arvalid,
  input  logic        m_arready,
  output axi_ax_t     m_ar,
  input  logic        m_rvalid,
  output logic        m_rready,
  input  axi_r_t      m_r,
  // AXI4 write master 0: joint traces
  output logic        p_awvalid,
  input  logic        p_awready,
  output axi_ax_t     p_aw,
  output logic        p_wvalid,
  input  logic        p_wready,
  output axi_w_t      p_w,
  input  logic        p_bvalid,
  output logic        p_bready,
  // AXI4 write master 1: biases, weights and results
  output logic        w_awvalid,
  input  logic        w_awready,
  output axi_ax_t     w_aw,
  output logic        w_wvalid,
  input  logic        w_wready,
  output axi_w_t      w_w,
  input  logic        w_bvalid,
  output logic        w_bready
);
  // ---------------------------------------------------------------- sizes
  localparam int IN_MCU    = 2;
  localparam int NTOT      = NACT + NSIL;
  localparam int IN_BEATS  = (N_IN + LANES - 1) / LANES;
  localparam int REC_BEATS = IN_BEATS + 1;
  localparam int IN_ROWS   = (N_IN * IN_MCU + LANES - 1) / LANES;
  localparam int JG        = (HID_MCU + LANES - 1) / LANES;
  localparam int HID_ROWS  = HID_HCU * JG;
  localparam int IDX_ROWS  = (HID_HCU * NTOT + LANES - 1) / LANES;
  localparam int UTR_ROWS  = IN_ROWS + HID_ROWS + 1;
  localparam int W_IH_BEATS = HID_HCU * JG * (1 + NACT * IN_MCU);
  localparam int W_HO_BEATS = 1 + HID_HCU * HID_MCU;
  localparam int P_IH_BEATS = HID_HCU * JG * NTOT * IN_MCU;
  localparam int P_HO_BEATS = HID_HCU * HID_MCU;

  // ------------------------------------------------------------ buffers
  fxp_lanes_t in_act  [IN_ROWS];
  fxp_lanes_t p_in    [IN_ROWS];
  fxp_lanes_t idx_mem [IDX_ROWS];
  fxp_lanes_t hid_act [HID_ROWS];
  fxp_lanes_t p_hid   [HID_ROWS];
  fxp_lanes_t out_act;
  fxp_lanes_t p_out;
  logic [7:0] label;
  logic [7:0] pred;

  // ---------------------------------------------------------- controller
  typedef enum logic [4:0] {
    S_IDLE, S_INIT, S_IDX_CMD, S_IDX, S_IN_CMD, S_IN, S_FWD_CMD, S_FWD,
    S_RES_CMD, S_RES, S_RES_WAIT, S_UTR, S_LRN_CMD, S_LRN, S_NEXT, S_DONE
  } state_t;
  state_t      state;
  kernel_cfg_t c;
  logic        proj;            // 0: input-hidden, 1: hidden-output
  logic [15:0] sample;
  logic [23:0] beat_cnt;        // beats consumed in S_IDX / S_IN
  logic [15:0] row;             // row counter of S_INIT / S_UTR

  // stream position counters
  logic [15:0] g_h, g_c, g_m;
  logic [7:0]  g_jg;
  logic        g_bias, g_done;

  // projection-dependent sizes
  logic [15:0] n_post, n_act, n_lim, pre_mcu, n_mcu;
  logic [7:0]  n_jg;
  always_comb begin
    n_post  = proj ? 16'd1 : 16'(HID_HCU);
    n_jg    = proj ? 8'd1  : 8'(JG);
    n_act   = proj ? 16'(HID_HCU) : 16'(NACT);
    pre_mcu = proj ? 16'(HID_MCU) : 16'(IN_MCU);
    n_mcu   = proj ? 16'(OUT_MCU) : 16'(HID_MCU);
    n_lim   = (state == S_LRN) ? (proj ? 16'(HID_HCU) : 16'(NTOT)) : n_act;
  end

  // ------------------------------------------------------------ reader
  logic        rd_cmd_valid, rd_cmd_ready, rd_busy;
  addr_t       rd_cmd_addr;
  logic [23:0] rd_cmd_beats;
  logic        rd_out_valid, rd_out_ready;
  beat_t       rd_out_data;
  logic        f_valid, f_ready;
  beat_t       f_data;
  logic [$clog2(FIFO_DEPTH+1)-1:0] f_count;

  axi_burst_reader #(.MAX_BURST(MAX_BURST)) u_rd (
    .clk, .rst_n,
    .cmd_valid(rd_cmd_valid), .cmd_ready(rd_cmd_ready), .cmd_addr(rd_cmd_addr),
    .cmd_beats(rd_cmd_beats), .busy(rd_busy),
    .arvalid(m_arvalid), .arready(m_arready), .ar(m_ar),
    .rvalid(m_rvalid), .rready(m_rready), .r(m_r),
    .out_valid(rd_out_valid), .out_ready(rd_out_ready), .out_data(rd_out_data)
  );

  stream_fifo #(.WIDTH(AXI_DW), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(rd_out_valid), .in_ready(rd_out_ready), .in_data(rd_out_data),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data), .count(f_count)
  );

  fxp_lanes_t f_lanes;
  assign f_lanes = fxp_lanes_t'(f_data);

  // ------------------------------------------------ gather of pre activity
  logic [15:0] idx_pos, pre_hcu;
  logic [31:0] pre_i;
  logic [31:0] pre_row, post_row;
  logic [3:0]  pre_lane;
  fxp_t        x_pre, p_pre;
  fxp_lanes_t  y_post, p_post, onehot;

  always_comb begin
    idx_pos = 16'(32'(g_h) * NTOT + 32'(g_c));
    pre_hcu = proj ? g_c : 16'(idx_mem[idx_pos[15:4]][idx_pos[3:0]]);
    pre_i   = 32'(pre_hcu) * IN_MCU + 32'(g_m);
    if (proj) begin
      pre_row  = 32'(pre_hcu) * JG + 32'(g_m >> 4);
      pre_lane = g_m[3:0];
    end else begin
      pre_row  = pre_i >> 4;
      pre_lane = pre_i[3:0];
    end
    if (proj) begin
      x_pre = hid_act[pre_row][pre_lane];
      p_pre = p_hid[pre_row][pre_lane];
    end else begin
      x_pre = in_act[pre_row][pre_lane];
      p_pre = p_in[pre_row][pre_lane];
    end
    post_row = 32'(g_h) * JG + 32'(g_jg);
    for (int l = 0; l < LANES; l++)
      onehot[l] = (8'(l) == label) ? FXP_ONE : '0;
    y_post = proj ? onehot : hid_act[post_row];
    p_post = proj ? p_out  : p_hid[post_row];
  end

  // ---------------------------------------------------- inference path
  logic       su_in_valid, su_in_ready, su_out_valid, su_out_ready, su_last;
  acc_lanes_t su_out_s;
  logic       sm_out_valid, sm_out_last;
  fxp_lanes_t sm_out_y;
  logic [15:0] sm_row, sm_hcnt;
  logic       fwd_feed, lrn_feed, step;

  assign fwd_feed    = (state == S_FWD) && !g_done;
  assign lrn_feed    = (state == S_LRN) && !g_done;
  assign su_in_valid = fwd_feed && f_valid;
  assign su_last     = !g_bias && (g_m == pre_mcu - 1'b1) && (g_c == n_act - 1'b1);

  support_unit u_sup (
    .clk, .rst_n,
    .in_valid(su_in_valid), .in_ready(su_in_ready), .in_first(g_bias), .in_last(su_last),
    .in_w(f_lanes), .in_x(x_pre),
    .out_valid(su_out_valid), .out_ready(su_out_ready), .out_s(su_out_s)
  );

  softmax_unit #(.MAX_MCU(HID_MCU > OUT_MCU ? HID_MCU : OUT_MCU)) u_sm (
    .clk, .rst_n,
    .n_beats(n_jg), .n_mcu(n_mcu),
    .in_valid(su_out_valid), .in_ready(su_out_ready), .in_s(su_out_s),
    .out_valid(sm_out_valid), .out_ready(1'b1), .out_y(sm_out_y), .out_last(sm_out_last)
  );

  // arg-max of the output activities
  logic [7:0] amax;
  always_comb begin
    amax = '0;
    for (int l = 1; l < OUT_MCU; l++)
      if (sm_out_y[l] > sm_out_y[amax]) amax = 8'(l);
  end

  // ----------------------------------------------------- learning path
  localparam int USER_W = 3 + DW + LANES * DW;   // bias, to_p, to_w, p_i, p_j
  logic              tu_in_valid, tu_in_ready, tu_out_valid, tu_out_ready;
  logic [USER_W-1:0] tu_in_user, tu_out_user;
  fxp_lanes_t        tu_out_p;
  logic              bw_out_valid, bw_out_ready;
  fxp_lanes_t        bw_out_w, bw_out_p;
  logic [1:0]        bw_out_user;
  logic              to_w_now;

  assign to_w_now    = g_bias || (g_c < n_act);
  assign tu_in_valid = lrn_feed && (g_bias || f_valid);
  assign tu_in_user  = {g_bias, !g_bias, to_w_now, p_pre, p_post};

  trace_update #(.USER_W(USER_W)) u_tu (
    .clk, .rst_n, .alpha(c.alpha),
    .in_valid(tu_in_valid), .in_ready(tu_in_ready),
    .in_p(f_lanes), .in_x(x_pre), .in_y(y_post), .in_user(tu_in_user),
    .out_valid(tu_out_valid), .out_ready(tu_out_ready), .out_p(tu_out_p), .out_user(tu_out_user)
  );

  bw_update #(.USER_W(2)) u_bw (
    .clk, .rst_n,
    .in_valid(tu_out_valid), .in_ready(tu_out_ready),
    .in_bias(tu_out_user[USER_W-1]), .in_pij(tu_out_p),
    .in_pi(fxp_t'(tu_out_user[LANES*DW +: DW])),
    .in_pj(fxp_lanes_t'(tu_out_user[LANES*DW-1:0])),
    .in_user(tu_out_user[USER_W-2 -: 2]),
    .out_valid(bw_out_valid), .out_ready(bw_out_ready),
    .out_w(bw_out_w), .out_p(bw_out_p), .out_user(bw_out_user)
  );

  // ---------------------------------------------------------- writers
  logic        wp_cmd_valid, wp_cmd_ready, wp_busy, wp_in_valid, wp_in_ready;
  logic        ww_cmd_valid, ww_cmd_ready, ww_busy, ww_in_valid, ww_in_ready;
  addr_t       wp_cmd_addr, ww_cmd_addr;
  logic [23:0] wp_cmd_beats, ww_cmd_beats;
  beat_t       ww_in_data;
  fxp_lanes_t  res_beat;
  logic        b_to_p, b_to_w;

  assign b_to_p       = bw_out_user[1];
  assign b_to_w       = bw_out_user[0];
  assign wp_in_valid  = bw_out_valid && b_to_p && (!b_to_w || ww_in_ready);
  assign bw_out_ready = (!b_to_p || wp_in_ready) && (!b_to_w || ww_in_ready);

  always_comb begin
    res_beat = '0;
    for (int l = 0; l < OUT_MCU; l++) res_beat[l] = out_act[l];
    res_beat[LANES-1] = fxp_t'({8'd0, pred});
  end
  assign ww_in_valid = (state == S_RES) ? 1'b1
                                        : (bw_out_valid && b_to_w && (!b_to_p || wp_in_ready));
  assign ww_in_data  = (state == S_RES) ? beat_t'(res_beat) : beat_t'(bw_out_w);

  axi_burst_writer #(.MAX_BURST(MAX_BURST)) u_wp (
    .clk, .rst_n,
    .cmd_valid(wp_cmd_valid), .cmd_ready(wp_cmd_ready), .cmd_addr(wp_cmd_addr),
    .cmd_beats(wp_cmd_beats), .busy(wp_busy),
    .in_valid(wp_in_valid), .in_ready(wp_in_ready), .in_data(beat_t'(bw_out_p)),
    .awvalid(p_awvalid), .awready(p_awready), .aw(p_aw),
    .wvalid(p_wvalid), .wready(p_wready), .w(p_w),
    .bvalid(p_bvalid), .bready(p_bready)
  );

  axi_burst_writer #(.MAX_BURST(MAX_BURST)) u_ww (
    .clk, .rst_n,
    .cmd_valid(ww_cmd_valid), .cmd_ready(ww_cmd_ready), .cmd_addr(ww_cmd_addr),
    .cmd_beats(ww_cmd_beats), .busy(ww_busy),
    .in_valid(ww_in_valid), .in_ready(ww_in_ready), .in_data(ww_in_data),
    .awvalid(w_awvalid), .awready(w_awready), .aw(w_aw),
    .wvalid(w_wvalid), .wready(w_wready), .w(w_w),
    .bvalid(w_bvalid), .bready(w_bready)
  );

  // ------------------------------------------------- command generation
  always_comb begin
    rd_cmd_valid = 1'b0;
    rd_cmd_addr  = '0;
    rd_cmd_beats = '0;
    unique case (state)
      S_IDX_CMD: begin
        rd_cmd_valid = 1'b1;
        rd_cmd_addr  = c.idx_base;
        rd_cmd_beats = 24'(IDX_ROWS);
      end
      S_IN_CMD: begin
        rd_cmd_valid = 1'b1;
        rd_cmd_addr  = c.in_base + addr_t'(32'(sample) * REC_BEATS * BEAT_BYTES);
        rd_cmd_beats = 24'(REC_BEATS);
      end
      S_FWD_CMD: begin
        rd_cmd_valid = 1'b1;
        rd_cmd_addr  = proj ? c.who_base : c.wih_base;
        rd_cmd_beats = proj ? 24'(W_HO_BEATS) : 24'(W_IH_BEATS);
      end
      S_LRN_CMD: begin
        rd_cmd_valid = 1'b1;
        rd_cmd_addr  = proj ? c.pho_base : c.pih_base;
        rd_cmd_beats = proj ? 24'(P_HO_BEATS) : 24'(P_IH_BEATS);
      end
      default: ;
    endcase
  end

  assign wp_cmd_valid = (state == S_LRN_CMD);
  assign wp_cmd_addr  = proj ? c.pho_base : c.pih_base;
  assign wp_cmd_beats = proj ? 24'(P_HO_BEATS) : 24'(P_IH_BEATS);
  assign ww_cmd_valid = (state == S_LRN_CMD) || (state == S_RES_CMD);
  always_comb begin
    if (state == S_RES_CMD) begin
      ww_cmd_addr  = c.out_base + addr_t'(32'(sample) * BEAT_BYTES);
      ww_cmd_beats = 24'd1;
    end else begin
      ww_cmd_addr  = proj ? c.who_base : c.wih_base;
      ww_cmd_beats = proj ? 24'(W_HO_BEATS) : 24'(W_IH_BEATS);
    end
  end

  // FIFO consumer
  always_comb begin
    unique case (state)
      S_IDX, S_IN: f_ready = 1'b1;
      S_FWD:       f_ready = fwd_feed && su_in_ready;
      S_LRN:       f_ready = lrn_feed && !g_bias && tu_in_ready;
      default:     f_ready = 1'b0;
    endcase
  end
  assign step = (state == S_FWD) ? (su_in_valid && su_in_ready)
                                 : (tu_in_valid && tu_in_ready);

  assign busy = (state != S_IDLE);

  // ------------------------------------------------------ sequential
  always_ff @(posedge clk) begin
    // index list and input record
    if (state == S_IDX && f_valid)
      idx_mem[beat_cnt[$clog2(IDX_ROWS+1)-1:0]] <= f_lanes;
    if (state == S_IN && f_valid && beat_cnt < 24'(IN_BEATS)) begin
      for (int l = 0; l < LANES; l++) begin
        automatic int r = (int'(beat_cnt) * LANES + l) * IN_MCU / LANES;
        automatic int k = ((int'(beat_cnt) * LANES + l) * IN_MCU) % LANES;
        if (r < IN_ROWS) begin
          in_act[r][k]     <= f_lanes[l];
          in_act[r][k + 1] <= FXP_ONE - f_lanes[l];
        end
      end
    end
    // softmax results
    if (sm_out_valid) begin
      if (proj) out_act <= sm_out_y;
      else      hid_act[sm_row] <= sm_out_y;
    end
    // unit traces: initialisation and update
    if (state == S_INIT || state == S_UTR) begin
      for (int l = 0; l < LANES; l++) begin
        if (32'(row) < IN_ROWS)
          p_in[row][l] <= (state == S_INIT) ? fxp_t'(4096 / IN_MCU)
                                            : trace_step(p_in[row][l], in_act[row][l], c.alpha);
        else if (32'(row) < IN_ROWS + HID_ROWS)
          p_hid[32'(row) - IN_ROWS][l] <= (state == S_INIT) ? fxp_t'(4096 / HID_MCU)
                      : trace_step(p_hid[32'(row) - IN_ROWS][l], hid_act[32'(row) - IN_ROWS][l], c.alpha);
        else
          p_out[l] <= (state == S_INIT) ? fxp_t'(4096 / OUT_MCU)
                                        : trace_step(p_out[l], onehot[l], c.alpha);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      c        <= '0;
      proj     <= 1'b0;
      sample   <= '0;
      beat_cnt <= '0;
      row      <= '0;
      g_h      <= '0;
      g_jg     <= '0;
      g_c      <= '0;
      g_m      <= '0;
      g_bias   <= 1'b1;
      g_done   <= 1'b0;
      sm_row   <= '0;
      sm_hcnt  <= '0;
      label    <= '0;
      pred     <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;

      // stream position counters
      if (step) begin
        if (g_bias) begin
          g_bias <= 1'b0;
        end else if (g_m != pre_mcu - 1'b1) begin
          g_m <= g_m + 1'b1;
        end else begin
          g_m <= '0;
          if (g_c != n_lim - 1'b1) begin
            g_c <= g_c + 1'b1;
          end else begin
            g_c    <= '0;
            g_bias <= (state == S_FWD) || (state == S_LRN);
            if (g_jg != n_jg - 1'b1) begin
              g_jg <= g_jg + 1'b1;
            end else begin
              g_jg <= '0;
              if (g_h != n_post - 1'b1) g_h <= g_h + 1'b1;
              else begin
                g_h    <= '0;
                g_done <= 1'b1;
              end
            end
          end
        end
      end

      // softmax output bookkeeping
      if (sm_out_valid) begin
        sm_row <= sm_row + 1'b1;
        if (sm_out_last) sm_hcnt <= sm_hcnt + 1'b1;
        if (proj) pred <= amax;
      end

      unique case (state)
        S_IDLE: if (start) begin
          c      <= cfg;
          sample <= '0;
          row    <= '0;
          state  <= cfg.learn ? S_INIT : S_IDX_CMD;
        end
        S_INIT: begin
          if (32'(row) == UTR_ROWS - 1) begin
            row   <= '0;
            state <= S_IDX_CMD;
          end else row <= row + 1'b1;
        end
        S_IDX_CMD: if (rd_cmd_ready) begin
          beat_cnt <= '0;
          state    <= S_IDX;
        end
        S_IDX: if (f_valid) begin
          beat_cnt <= beat_cnt + 1'b1;
          if (beat_cnt == 24'(IDX_ROWS - 1)) state <= S_IN_CMD;
        end
        S_IN_CMD: if (rd_cmd_ready) begin
          beat_cnt <= '0;
          state    <= S_IN;
        end
        S_IN: if (f_valid) begin
          beat_cnt <= beat_cnt + 1'b1;
          if (beat_cnt == 24'(IN_BEATS)) begin
            label <= f_data[7:0];
            proj  <= 1'b0;
            state <= S_FWD_CMD;
          end
        end
        S_FWD_CMD: if (rd_cmd_ready) begin
          g_h <= '0; g_jg <= '0; g_c <= '0; g_m <= '0;
          g_bias <= 1'b1; g_done <= 1'b0;
          sm_row <= '0; sm_hcnt <= '0;
          state  <= S_FWD;
        end
        S_FWD: if (g_done && sm_hcnt == n_post) begin
          if (!proj) begin
            proj  <= 1'b1;
            state <= S_FWD_CMD;
          end else state <= S_RES_CMD;
        end
        S_RES_CMD: if (ww_cmd_ready) state <= S_RES;
        S_RES: if (ww_in_ready) state <= S_RES_WAIT;
        S_RES_WAIT: if (!ww_busy) begin
          row  <= '0;
          proj <= 1'b0;
          state <= c.learn ? S_UTR : S_NEXT;
        end
        S_UTR: begin
          if (32'(row) == UTR_ROWS - 1) begin
            row   <= '0;
            state <= S_LRN_CMD;
          end else row <= row + 1'b1;
        end
        S_LRN_CMD: if (rd_cmd_ready && wp_cmd_ready && ww_cmd_ready) begin
          g_h <= '0; g_jg <= '0; g_c <= '0; g_m <= '0;
          g_bias <= 1'b1; g_done <= 1'b0;
          state  <= S_LRN;
        end
        S_LRN: if (g_done && !tu_out_valid && !bw_out_valid && !wp_busy && !ww_busy) begin
          if (!proj) begin
            proj  <= 1'b1;
            state <= S_LRN_CMD;
          end else state <= S_NEXT;
        end
        S_NEXT: begin
          if (sample == c.nsamples - 1'b1) state <= S_DONE;
          else begin
            sample <= sample + 1'b1;
            state  <= S_IN_CMD;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The three commands of a learning pass are issued together.
  a_lrn_cmd: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_LRN_CMD && rd_cmd_ready) |-> (wp_cmd_ready && ww_cmd_ready));
endmodule
