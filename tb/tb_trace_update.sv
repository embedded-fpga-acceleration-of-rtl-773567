// tb_trace_update -- random traces, activities and learning rates against
// the moving-average step written out here in integer arithmetic,
// p' = p + (alpha * (((x*y) >>> 12) - p)) >>> 12, saturated to 16 bits.
// Checks the one-cycle latency, the side-band pass-through and that a
// stalled output holds its beat.
module tb_trace_update;
  import bcpnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  fxp_t alpha, in_x;
  logic in_valid, in_ready, out_valid, out_ready;
  fxp_lanes_t in_p, in_y, out_p;
  logic [7:0] in_user, out_user;
  int checks = 0, failures = 0;

  trace_update #(.USER_W(8)) dut (.*);

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

  function automatic int sat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  initial begin
    int expv [LANES];
    in_valid = 0; out_ready = 1; alpha = '0; in_x = '0; in_p = '0; in_y = '0; in_user = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      alpha = fxp_t'($urandom_range(4096));
      in_x  = fxp_t'($urandom_range(4096));
      in_user = 8'($urandom);
      for (int l = 0; l < LANES; l++) begin
        longint xy;
        in_p[l] = fxp_t'($urandom_range(4096));
        in_y[l] = fxp_t'($urandom_range(4096));
        xy = (longint'(in_x) * longint'(in_y[l])) >>> 12;
        expv[l] = sat(longint'(in_p[l]) + ((longint'(alpha) * (xy - longint'(in_p[l]))) >>> 12));
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      chk(out_valid, "one-cycle latency");
      chk(out_user == in_user, "side band");
      for (int l = 0; l < LANES; l++)
        chk(int'(out_p[l]) == expv[l], $sformatf("lane %0d: %0d vs %0d", l, out_p[l], expv[l]));
      if (t % 10 == 0) begin
        out_ready = 0;
        @(negedge clk);
        chk(out_valid && int'(out_p[0]) == expv[0], "held while stalled");
        out_ready = 1;
      end
    end
    @(negedge clk);
    chk(!out_valid, "drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
