// tb_support_unit -- random bias/weight groups against sums computed here
// with integer arithmetic: s = b + sum (w*x >>> 12) per lane.
// Also checks the rate: with an always-ready consumer a group of B beats
// fed back to back is accepted at one beat per clock and its result appears
// one cycle after its last beat; and back-pressure holds the result.
module tb_support_unit;
  import bcpnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, in_first, in_last, out_valid, out_ready;
  fxp_lanes_t in_w;
  fxp_t in_x;
  acc_lanes_t out_s;
  int checks = 0, failures = 0;

  support_unit dut (.*);

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

  task automatic group(input int nb, input bit stall);
    longint expv [LANES];
    int t_last;
    for (int l = 0; l < LANES; l++) expv[l] = 0;
    for (int b = 0; b <= nb; b++) begin
      in_valid = 1; in_first = (b == 0); in_last = (b == nb);
      in_x = fxp_t'($urandom_range(8191) - 4096);
      for (int l = 0; l < LANES; l++) begin
        in_w[l] = fxp_t'($urandom_range(65535));
        if (b == 0) expv[l] = longint'(in_w[l]);
        else expv[l] = expv[l] + ((longint'(in_w[l]) * longint'(in_x)) >>> 12);
      end
      #1;
      chk(in_ready, "accepts one beat per clock");
      @(negedge clk);
    end
    in_valid = 0;
    t_last = 0;
    chk(out_valid, "result one cycle after the last beat");
    if (stall) begin
      repeat (3) @(negedge clk);
      chk(out_valid, "result held under back-pressure");
      #1; chk(!in_ready, "input refused while result waits");
    end
    for (int l = 0; l < LANES; l++)
      chk(out_s[l] == acc_t'(expv[l]), $sformatf("lane %0d sum", l));
    out_ready = 1; @(negedge clk); out_ready = stall ? 0 : 1;
  endtask

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; in_w = '0; in_x = '0; out_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int g = 0; g < 40; g++) begin
      out_ready = 0;
      group(1 + $urandom_range(40), g % 3 == 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
