// tb_bcpnn_kernel -- end-to-end test of the BCPNN kernel at reduced size.
//
// A behavioural DDR (axi_mem_model) is filled with a random network: sparse
// index list, input-hidden and hidden-output bias/weight streams, joint
// traces, and input records with labels. The kernel then runs three times:
// inference only, inference with online learning, and inference only again
// with the learned parameters. A reference model written here, working on
// flat arrays in the kernel's arithmetic (the Q3.12 helpers of bcpnn_pkg),
// predicts every result beat, every rewritten trace and every rewritten
// bias/weight, and the testbench compares them beat by beat.
// Sizes: 20 pixels, 2 hidden HCUs of 20 MCUs (so the last group of 16 lanes
// is partly padding), 3 active and 2 silent connections, 10 classes. The
// hidden-output stream is placed so that it crosses a 4 KiB boundary.
// Mechanisms counted (each must occur): softmax back-pressure on the support
// unit, memory back-pressure, a burst cut at a 4 KiB boundary, padding lanes,
// silent-connection trace beats, inserted bias beats, learning and inference
// runs (mode switch).
module tb_bcpnn_kernel;
  import bcpnn_pkg::*;

  localparam int N_IN = 20, HID_HCU = 2, HID_MCU = 20, NACT = 3, NSIL = 2, OUT_MCU = 10;
  localparam int NTOT = NACT + NSIL;
  localparam int JG = (HID_MCU + 15) / 16;
  localparam int IN_BEATS = (N_IN + 15) / 16;
  localparam int REC = IN_BEATS + 1;
  localparam int IN_ROWS = (2 * N_IN + 15) / 16;
  localparam int NS = 3;                       // samples per run
  localparam int W_IH = HID_HCU * JG * (1 + NACT * 2);
  localparam int W_HO = 1 + HID_HCU * HID_MCU;
  localparam int P_IH = HID_HCU * JG * NTOT * 2;
  localparam int P_HO = HID_HCU * HID_MCU;
  localparam int IDX_BEATS = (HID_HCU * NTOT + 15) / 16;
  // beat addresses of the regions; the hidden-output stream starts 6 beats
  // before a 4 KiB boundary
  localparam int A_IN  = 0;
  localparam int A_IDX = A_IN + NS * REC + 8;
  localparam int A_WIH = A_IDX + IDX_BEATS + 8;
  localparam int A_PIH = A_WIH + W_IH + 8;
  localparam int A_PHO = A_PIH + P_IH + 8;
  localparam int A_WHO = ((A_PHO + P_HO) / 128 + 1) * 128 + 122;
  localparam int A_OUT = A_WHO + W_HO + 8;
  localparam int MEM_BEATS = A_OUT + NS + 8;
  localparam int WATCHDOG = 400000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start, busy, done;
  kernel_cfg_t cfg;
  logic    arvalid, arready, rvalid, rready;
  axi_ax_t ar;
  axi_r_t  r;
  logic    awvalid [2], awready [2], wvalid [2], wready [2], bvalid [2], bready [2];
  axi_ax_t aw [2];
  axi_w_t  w [2];

  bcpnn_kernel #(.N_IN(N_IN), .HID_HCU(HID_HCU), .HID_MCU(HID_MCU), .NACT(NACT),
                 .NSIL(NSIL), .OUT_MCU(OUT_MCU)) dut (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .m_arvalid(arvalid), .m_arready(arready), .m_ar(ar),
    .m_rvalid(rvalid), .m_rready(rready), .m_r(r),
    .p_awvalid(awvalid[0]), .p_awready(awready[0]), .p_aw(aw[0]),
    .p_wvalid(wvalid[0]), .p_wready(wready[0]), .p_w(w[0]),
    .p_bvalid(bvalid[0]), .p_bready(bready[0]),
    .w_awvalid(awvalid[1]), .w_awready(awready[1]), .w_aw(aw[1]),
    .w_wvalid(wvalid[1]), .w_wready(wready[1]), .w_w(w[1]),
    .w_bvalid(bvalid[1]), .w_bready(bready[1])
  );

  axi_mem_model #(.MEM_BEATS(MEM_BEATS)) u_mem (
    .clk, .rst_n, .arvalid, .arready, .ar, .rvalid, .rready, .r,
    .awvalid, .awready, .aw, .wvalid, .wready, .w, .bvalid, .bready
  );

  int checks = 0, failures = 0;
  int n_smstall = 0, n_memstall = 0, n_silent = 0, n_biasins = 0;
  int n_learn_runs = 0, n_infer_runs = 0, n_pad = 0;

  // ------------------------------------------------------- reference state
  int idx [HID_HCU * NTOT];
  int wih [W_IH * 16];          // beat*16 + lane
  int who [W_HO * 16];
  int pih [P_IH * 16];
  int pho [P_HO * 16];
  int pix [NS][IN_BEATS * 16];
  int lab [NS];
  int p_in [IN_ROWS * 16];
  int p_hid [HID_HCU * JG * 16];
  int p_out [16];
  int x_in [IN_ROWS * 16];
  int y_hid [HID_HCU * JG * 16];
  int y_out [16];
  int pred;

  function automatic beat_t pack(input int v [16]);
    beat_t b;
    for (int l = 0; l < 16; l++) b[l*16 +: 16] = 16'(v[l]);
    return b;
  endfunction

  function automatic int lane(input beat_t b, input int l);
    return int'(fxp_t'(b[l*16 +: 16]));
  endfunction

  // soft-WTA of n valid supports out of 16*nb lanes, as the kernel computes it
  task automatic softmax(input longint s [], input int n, output int y []);
    longint mx;
    longint sum;
    longint rc;
    int e [];
    y = new[s.size()];
    e = new[s.size()];
    mx = s[0];
    for (int j = 1; j < n; j++) if (s[j] > mx) mx = s[j];
    sum = 0;
    for (int j = 0; j < s.size(); j++) begin
      e[j] = (j < n) ? int'(fxp_exp_neg(acc_t'(s[j] - mx))) : 0;
      sum += e[j];
    end
    rc = (longint'(1) << 24) / sum;
    for (int j = 0; j < s.size(); j++)
      y[j] = int'(sat16(acc_t'((longint'(e[j]) * rc) >>> 12)));
  endtask

  task automatic ref_forward(input int s);
    longint sup [];
    int y [];
    // input activities
    for (int i = 0; i < IN_ROWS * 16; i++) begin
      automatic int p = i / 2;
      x_in[i] = (i % 2 == 0) ? pix[s][p] : int'(fxp_t'(16'(4096 - pix[s][p])));
    end
    // hidden layer
    for (int h = 0; h < HID_HCU; h++) begin
      sup = new[JG * 16];
      for (int g = 0; g < JG; g++)
        for (int l = 0; l < 16; l++) begin
          automatic int b0 = h * JG + g;
          automatic longint a = wih[(b0 * (1 + NACT * 2)) * 16 + l];
          for (int c = 0; c < NACT; c++)
            for (int m = 0; m < 2; m++)
              a = a + mul_acc(fxp_t'(wih[(b0 * (1 + NACT * 2) + 1 + c * 2 + m) * 16 + l]),
                              fxp_t'(x_in[idx[h * NTOT + c] * 2 + m]));
          sup[g * 16 + l] = longint'(acc_t'(a));
        end
      softmax(sup, HID_MCU, y);
      for (int j = 0; j < JG * 16; j++) y_hid[h * JG * 16 + j] = y[j];
    end
    // output layer
    sup = new[16];
    for (int l = 0; l < 16; l++) begin
      automatic longint a = who[l];
      for (int c = 0; c < HID_HCU; c++)
        for (int m = 0; m < HID_MCU; m++)
          a = a + mul_acc(fxp_t'(who[(1 + c * HID_MCU + m) * 16 + l]),
                          fxp_t'(y_hid[c * JG * 16 + m]));
      sup[l] = longint'(acc_t'(a));
    end
    softmax(sup, OUT_MCU, y);
    for (int l = 0; l < 16; l++) y_out[l] = y[l];
    pred = 0;
    for (int l = 1; l < OUT_MCU; l++) if (y_out[l] > y_out[pred]) pred = l;
  endtask

  task automatic ref_learn(input int s, input int alpha);
    int oh [16];
    for (int l = 0; l < 16; l++) oh[l] = (l == lab[s]) ? 4096 : 0;
    for (int i = 0; i < IN_ROWS * 16; i++)
      p_in[i] = trace_step(fxp_t'(p_in[i]), fxp_t'(x_in[i]), fxp_t'(alpha));
    for (int j = 0; j < HID_HCU * JG * 16; j++)
      p_hid[j] = trace_step(fxp_t'(p_hid[j]), fxp_t'(y_hid[j]), fxp_t'(alpha));
    for (int l = 0; l < 16; l++)
      p_out[l] = trace_step(fxp_t'(p_out[l]), fxp_t'(oh[l]), fxp_t'(alpha));
    // input-hidden
    for (int h = 0; h < HID_HCU; h++)
      for (int g = 0; g < JG; g++)
        for (int l = 0; l < 16; l++) begin
          automatic int b0 = h * JG + g;
          automatic int j = b0 * 16 + l;
          wih[(b0 * (1 + NACT * 2)) * 16 + l] = fxp_ln(fxp_t'(p_hid[j]));
          for (int c = 0; c < NTOT; c++)
            for (int m = 0; m < 2; m++) begin
              automatic int i = idx[h * NTOT + c] * 2 + m;
              automatic int k = ((b0 * NTOT + c) * 2 + m) * 16 + l;
              pih[k] = trace_step(fxp_t'(pih[k]), fxp_mul(fxp_t'(x_in[i]), fxp_t'(y_hid[j])),
                                  fxp_t'(alpha));
              if (c < NACT)
                wih[(b0 * (1 + NACT * 2) + 1 + c * 2 + m) * 16 + l] =
                  sat16(acc_t'(fxp_ln(fxp_t'(pih[k]))) - acc_t'(fxp_ln(fxp_t'(p_in[i])))
                        - acc_t'(fxp_ln(fxp_t'(p_hid[j]))));
            end
        end
    // hidden-output
    for (int l = 0; l < 16; l++) begin
      who[l] = fxp_ln(fxp_t'(p_out[l]));
      for (int c = 0; c < HID_HCU; c++)
        for (int m = 0; m < HID_MCU; m++) begin
          automatic int i = c * JG * 16 + m;
          automatic int k = (c * HID_MCU + m) * 16 + l;
          pho[k] = trace_step(fxp_t'(pho[k]), fxp_mul(fxp_t'(y_hid[i]), fxp_t'(oh[l])),
                              fxp_t'(alpha));
          who[(1 + c * HID_MCU + m) * 16 + l] =
            sat16(acc_t'(fxp_ln(fxp_t'(pho[k]))) - acc_t'(fxp_ln(fxp_t'(p_hid[i])))
                  - acc_t'(fxp_ln(fxp_t'(p_out[l]))));
        end
    end
  endtask

  task automatic check_region(input string what, input int base, input int nbeats, input int ref_v []);
    int bad = 0;
    for (int b = 0; b < nbeats; b++)
      for (int l = 0; l < 16; l++)
        if (lane(u_mem.mem[base + b], l) != ref_v[b * 16 + l]) begin
          if (bad < 5) $display("MISMATCH %s beat %0d lane %0d: got %0d want %0d", what, b, l,
                                lane(u_mem.mem[base + b], l), ref_v[b * 16 + l]);
          bad++;
        end
    checks++;
    if (bad != 0) failures++;
  endtask

  task automatic run(input bit learn, input int alpha);
    int t0;
    int tmp [16];
    if (learn) begin
      // the kernel starts its unit traces afresh for a learning run
      foreach (p_in[i])  p_in[i]  = 4096 / 2;
      foreach (p_hid[i]) p_hid[i] = 4096 / HID_MCU;
      foreach (p_out[i]) p_out[i] = 4096 / OUT_MCU;
    end
    cfg = '0;
    cfg.learn = learn; cfg.nsamples = NS; cfg.alpha = fxp_t'(alpha);
    cfg.in_base = A_IN * 32; cfg.idx_base = A_IDX * 32; cfg.wih_base = A_WIH * 32;
    cfg.who_base = A_WHO * 32; cfg.pih_base = A_PIH * 32; cfg.pho_base = A_PHO * 32;
    cfg.out_base = A_OUT * 32;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    t0 = $time;
    for (int s = 0; s < NS; s++) begin
      int resb [];
      ref_forward(s);
      resb = new[16];
      for (int l = 0; l < 16; l++) resb[l] = (l < OUT_MCU) ? y_out[l] : 0;
      resb[15] = pred;
      if (learn) ref_learn(s, alpha);
      // wait until this sample's result beat has been written
      wait (int'(dut.state) == 14);   // S_NEXT
      check_region($sformatf("result s%0d", s), A_OUT + s, 1, resb);
      wait (int'(dut.state) != 14);
    end
    wait (done);
    if (learn) n_learn_runs++; else n_infer_runs++;
    check_region("w_ih", A_WIH, W_IH, wih);
    check_region("w_ho", A_WHO, W_HO, who);
    check_region("p_ih", A_PIH, P_IH, pih);
    check_region("p_ho", A_PHO, P_HO, pho);
    $display("run learn=%0d took %0d cycles", learn, ($time - t0) / 10);
    @(posedge clk);
  endtask

  // mechanism counters
  always @(posedge clk) begin
    if (dut.su_out_valid && !dut.su_out_ready) n_smstall++;
    if ((rvalid == 0 && dut.u_rd.busy) || (wvalid[0] && !wready[0])) n_memstall++;
    if (dut.wp_in_valid && dut.wp_in_ready && !dut.b_to_w) n_silent++;
    if (dut.tu_in_valid && dut.tu_in_ready && dut.g_bias) n_biasins++;
  end

  initial begin
    // watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tmp [16];
    start = 0; cfg = '0;
    for (int b = 0; b < MEM_BEATS; b++) u_mem.mem[b] = '0;
    // index list: distinct input HCUs per hidden HCU
    for (int h = 0; h < HID_HCU; h++)
      for (int c = 0; c < NTOT; c++) idx[h * NTOT + c] = (h * 7 + c * 3) % N_IN;
    for (int b = 0; b < IDX_BEATS; b++) begin
      for (int l = 0; l < 16; l++) tmp[l] = (b * 16 + l < HID_HCU * NTOT) ? idx[b * 16 + l] : 0;
      u_mem.mem[A_IDX + b] = pack(tmp);
    end
    foreach (wih[i]) wih[i] = $urandom_range(4000) - 2000;
    foreach (who[i]) who[i] = $urandom_range(8000) - 4000;
    foreach (pih[i]) pih[i] = 20 + $urandom_range(200);
    foreach (pho[i]) pho[i] = 20 + $urandom_range(200);
    for (int b = 0; b < W_IH; b++) begin for (int l = 0; l < 16; l++) tmp[l] = wih[b*16+l]; u_mem.mem[A_WIH+b] = pack(tmp); end
    for (int b = 0; b < W_HO; b++) begin for (int l = 0; l < 16; l++) tmp[l] = who[b*16+l]; u_mem.mem[A_WHO+b] = pack(tmp); end
    for (int b = 0; b < P_IH; b++) begin for (int l = 0; l < 16; l++) tmp[l] = pih[b*16+l]; u_mem.mem[A_PIH+b] = pack(tmp); end
    for (int b = 0; b < P_HO; b++) begin for (int l = 0; l < 16; l++) tmp[l] = pho[b*16+l]; u_mem.mem[A_PHO+b] = pack(tmp); end
    for (int s = 0; s < NS; s++) begin
      lab[s] = $urandom_range(OUT_MCU - 1);
      foreach (pix[s][p]) pix[s][p] = $urandom_range(4096);
      for (int b = 0; b < IN_BEATS; b++) begin
        for (int l = 0; l < 16; l++) tmp[l] = pix[s][b * 16 + l];
        u_mem.mem[A_IN + s * REC + b] = pack(tmp);
      end
      for (int l = 0; l < 16; l++) tmp[l] = (l == 0) ? lab[s] : 0;
      u_mem.mem[A_IN + s * REC + IN_BEATS] = pack(tmp);
    end
    if (HID_MCU % 16 != 0) n_pad = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    run(0, 0);
    run(1, 400);
    run(0, 0);

    // each mechanism must have happened
    checks++; if (n_smstall == 0)  begin failures++; $display("no softmax stall"); end
    checks++; if (n_memstall == 0) begin failures++; $display("no memory stall"); end
    checks++; if (u_mem.split_count == 0) begin failures++; $display("no 4 KiB split"); end
    checks++; if (n_silent == 0)   begin failures++; $display("no silent beats"); end
    checks++; if (n_biasins == 0)  begin failures++; $display("no bias beats"); end
    checks++; if (n_learn_runs == 0 || n_infer_runs < 2) begin failures++; $display("mode switch missing"); end
    checks++; if (n_pad == 0)      begin failures++; $display("no padding lanes"); end
    $display("mechanisms: softmax stalls %0d, memory stalls %0d, 4KiB splits %0d, silent beats %0d, bias beats %0d, learn runs %0d, inference runs %0d",
             n_smstall, n_memstall, u_mem.split_count, n_silent, n_biasins, n_learn_runs, n_infer_runs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
