// tb_bw_update -- random probability traces against the Bayesian-Hebbian
// rule computed here in real arithmetic: b = ln p_j and
// w = ln p_ij - ln p_i - ln p_j = ln(p_ij / (p_i p_j)), each logarithm and
// the result clipped to [-8, 8) as the Q3.12 format requires. Each result must be
// within 0.03 of the real value (the logarithm is approximated). Also checks
// the one-cycle latency, that the traces pass through unchanged, and the
// side band.
module tb_bw_update;
  import bcpnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready, in_bias;
  fxp_lanes_t in_pij, in_pj, out_w, out_p;
  fxp_t in_pi;
  logic [3:0] in_user, out_user;
  int checks = 0, failures = 0;

  bw_update #(.USER_W(4)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  function automatic real clip(input real v);
    if (v > 32767.0 / 4096.0) return 32767.0 / 4096.0;
    if (v < -8.0) return -8.0;
    return v;
  endfunction

  initial begin
    real want [LANES];
    in_valid = 0; out_ready = 1; in_bias = 0; in_pij = '0; in_pj = '0; in_pi = '0; in_user = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      in_bias = (t % 4 == 0);
      in_pi   = fxp_t'(1 + $urandom_range(4095));
      in_user = 4'($urandom);
      for (int l = 0; l < LANES; l++) begin
        in_pj[l]  = fxp_t'(1 + $urandom_range(4095));
        in_pij[l] = fxp_t'(1 + $urandom_range(in_pj[l] - 1));
        if (in_bias) want[l] = clip($ln(real'(in_pj[l]) / 4096.0));
        // each logarithm is itself held in Q3.12, so it is clipped first
        else want[l] = clip(clip($ln(real'(in_pij[l]) / 4096.0))
                            - clip($ln(real'(in_pi) / 4096.0))
                            - clip($ln(real'(in_pj[l]) / 4096.0)));
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      chk(out_valid && out_user == in_user, "latency and side band");
      for (int l = 0; l < LANES; l++) begin
        automatic real d = real'(out_w[l]) / 4096.0 - want[l];
        chk(d < 0.03 && d > -0.03, $sformatf("t%0d lane %0d: %f want %f", t, l,
                                             real'(out_w[l]) / 4096.0, want[l]));
        chk(out_p[l] == in_pij[l], "trace pass-through");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
