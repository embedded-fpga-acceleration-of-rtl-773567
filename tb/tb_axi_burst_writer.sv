// tb_axi_burst_writer -- commands of random length and start address, some
// crossing 4 KiB boundaries, written into a behavioural DDR through the
// writer with random gaps in the input stream. Afterwards the written range
// must hold the stream and the beats just outside it must be untouched.
// Every write address is checked for at most 16 beats and no 4 KiB
// crossing; the memory model checks WLAST placement; busy must stay high
// until the last write response.
module tb_axi_burst_writer;
  import bcpnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        cmd_valid, cmd_ready, busy, in_valid, in_ready;
  addr_t       cmd_addr;
  logic [23:0] cmd_beats;
  beat_t       in_data;
  logic    awvalid [2], awready [2], wvalid [2], wready [2], bvalid [2], bready [2];
  axi_ax_t aw [2];
  axi_w_t  w [2];
  logic    arvalid, arready, rvalid, rready;
  axi_ax_t ar;
  axi_r_t  r;
  int checks = 0, failures = 0;
  int bursts_open = 0;

  axi_burst_writer #(.MAX_BURST(16)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_addr, .cmd_beats, .busy,
    .in_valid, .in_ready, .in_data,
    .awvalid(awvalid[0]), .awready(awready[0]), .aw(aw[0]),
    .wvalid(wvalid[0]), .wready(wready[0]), .w(w[0]),
    .bvalid(bvalid[0]), .bready(bready[0]));
  axi_mem_model #(.MEM_BEATS(4096), .STALL_PCT(30)) u_mem (.*);

  assign arvalid = 0; assign ar = '0; assign rready = 0;
  assign awvalid[1] = 0; assign aw[1] = '0; assign wvalid[1] = 0; assign w[1] = '0;
  assign bready[1] = 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  always @(posedge clk) begin
    if (awvalid[0] && awready[0]) begin
      automatic int b0 = int'(aw[0].addr) / 32;
      chk(aw[0].len < 16, "burst at most 16 beats");
      chk((b0 / 128) == ((b0 + int'(aw[0].len)) / 128), "no 4 KiB crossing");
      bursts_open++;
    end
    if (bvalid[0] && bready[0]) bursts_open--;
  end

  function automatic beat_t pattern(input int b, input int t);
    return {8{32'(b * 31 + t * 1000003)}};
  endfunction

  initial begin
    cmd_valid = 0; cmd_addr = '0; cmd_beats = '0; in_valid = 0; in_data = '0;
    for (int b = 0; b < 4096; b++) u_mem.mem[b] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      automatic int n = 1 + $urandom_range(100);
      automatic int b0 = (t % 3 == 0) ? 128 * (1 + $urandom_range(20)) - $urandom_range(20)
                                       : 1 + $urandom_range(3900);
      automatic int sent = 0;
      for (int b = b0 - 1; b <= b0 + n; b++) u_mem.mem[b] = '1;
      @(negedge clk);
      cmd_valid = 1; cmd_addr = addr_t'(b0 * 32); cmd_beats = 24'(n);
      @(negedge clk);
      cmd_valid = 0;
      while (sent < n) begin
        in_valid = ($urandom_range(99) < 70);
        in_data  = pattern(b0 + sent, t);
        #1;
        if (in_valid && in_ready) sent++;
        @(negedge clk);
      end
      in_valid = 0;
      while (busy) @(negedge clk);
      chk(bursts_open == 0, "busy until every response");
      for (int b = 0; b < n; b++)
        chk(u_mem.mem[b0 + b] == pattern(b0 + b, t), $sformatf("cmd %0d beat %0d", t, b));
      chk(u_mem.mem[b0 - 1] == '1 && u_mem.mem[b0 + n] == '1, "neighbours untouched");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
