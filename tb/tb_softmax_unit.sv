// tb_softmax_unit -- random hypercolumns of supports against a softmax
// computed here in real arithmetic with $exp. Each activity must be within
// 0.01 of exp(s_j)/sum exp(s_k); padding lanes (index >= n_mcu) must be 0;
// the activities of an HCU must sum to 1, less at most one 2^-12 step per MCU. Also checks the
// latency of an HCU (3*n_beats + 24 cycles from first input to last output
// with an always-ready consumer) and that input is refused while it works.
module tb_softmax_unit;
  import bcpnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0]  n_beats;
  logic [15:0] n_mcu;
  logic in_valid, in_ready, out_valid, out_ready, out_last;
  acc_lanes_t in_s;
  fxp_lanes_t out_y;
  int checks = 0, failures = 0;

  softmax_unit #(.MAX_MCU(128)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  task automatic hcu(input int nb, input int nm, input int spread);
    real s [128];
    real z, tot;
    int t0, t1;
    n_beats = 8'(nb); n_mcu = 16'(nm);
    z = 0;
    for (int b = 0; b < nb; b++) begin
      for (int l = 0; l < LANES; l++) begin
        in_s[l] = acc_t'($urandom_range(2 * spread) - spread + 4096);
        s[b * LANES + l] = real'(in_s[l]) / 4096.0;
      end
      in_valid = 1;
      if (b == 0) t0 = int'($time / 10);
      #1; chk(in_ready, "ready while collecting");
      @(negedge clk);
    end
    in_valid = 0;
    #1; chk(!in_ready, "input refused while working");
    for (int j = 0; j < nm; j++) z += $exp(s[j]);
    tot = 0;
    for (int b = 0; b < nb; b++) begin
      while (!out_valid) @(negedge clk);
      for (int l = 0; l < LANES; l++) begin
        automatic int j = b * LANES + l;
        automatic real y = real'(out_y[l]) / 4096.0;
        if (j < nm) begin
          automatic real d = y - $exp(s[j]) / z;
          chk(d < 0.01 && d > -0.01, $sformatf("y[%0d] = %f want %f", j, y, $exp(s[j]) / z));
          tot += y;
        end else chk(out_y[l] == 0, "padding lane is 0");
      end
      chk(out_last == (b == nb - 1), "out_last");
      t1 = int'($time / 10);
      @(negedge clk);
    end
    // each activity is truncated, so the sum may fall short by one step per MCU
    chk(tot > 1.0 - real'(nm) / 4096.0 - 0.01 && tot < 1.01, $sformatf("sum %f", tot));
    chk(t1 - t0 == 3 * nb + 24, $sformatf("latency %0d for %0d beats", t1 - t0, nb));
  endtask

  initial begin
    in_valid = 0; out_ready = 1; n_beats = 1; n_mcu = 16; in_s = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 30; t++) begin
      automatic int nb = 1 + $urandom_range(7);
      automatic int nm = nb * 16 - $urandom_range(15);
      hcu(nb, nm, (t % 2) ? 8000 : 20000);
    end
    hcu(8, 128, 30000);
    hcu(1, 10, 12000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
