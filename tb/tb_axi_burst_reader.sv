// tb_axi_burst_reader -- commands of random length and start address, some
// crossing 4 KiB boundaries, read from a behavioural DDR filled with a known
// pattern. Every delivered beat is compared with the pattern, every read
// address request is checked for at most 16 beats and no 4 KiB crossing, and
// busy must fall after the last beat. With a memory that never stalls, a
// 64-beat command must complete within 64 + 8 cycles (one beat per clock
// after the first data).
module tb_axi_burst_reader;
  import bcpnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        cmd_valid, cmd_ready, busy, arvalid, arready, rvalid, rready, out_valid, out_ready;
  addr_t       cmd_addr;
  logic [23:0] cmd_beats;
  axi_ax_t     ar;
  axi_r_t      r;
  beat_t       out_data;
  logic    awvalid [2], awready [2], wvalid [2], wready [2], bvalid [2], bready [2];
  axi_ax_t aw [2];
  axi_w_t  w [2];
  int checks = 0, failures = 0;

  axi_burst_reader #(.MAX_BURST(16)) dut (.*);
  axi_mem_model #(.MEM_BEATS(4096), .STALL_PCT(25)) u_mem (.*);

  initial begin
    for (int p = 0; p < 2; p++) begin awvalid[p] = 0; wvalid[p] = 0; bready[p] = 1; aw[p] = '0; w[p] = '0; end
  end

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

  always @(posedge clk) if (arvalid && arready) begin
    automatic int b0 = int'(ar.addr) / 32;
    chk(ar.len < 16, "burst at most 16 beats");
    chk((b0 / 128) == ((b0 + int'(ar.len)) / 128), "no 4 KiB crossing");
  end

  function automatic beat_t pattern(input int b);
    return {8{32'(b * 7919 + 13)}};
  endfunction

  task automatic read_cmd(input int b0, input int n, input bit random_ready, output int cycles);
    int got = 0;
    int t0;
    @(negedge clk);
    cmd_valid = 1; cmd_addr = addr_t'(b0 * 32); cmd_beats = 24'(n);
    t0 = int'($time / 10);
    @(negedge clk);
    cmd_valid = 0;
    while (got < n) begin
      out_ready = random_ready ? ($urandom_range(99) < 70) : 1'b1;
      #1;
      if (out_valid && out_ready) begin
        chk(out_data == pattern(b0 + got), $sformatf("beat %0d of cmd at %0d", got, b0));
        got++;
      end
      @(negedge clk);
    end
    out_ready = 0;
    cycles = int'($time / 10) - t0;
    chk(!busy, "idle after the last beat");
  endtask

  initial begin
    int cyc;
    cmd_valid = 0; cmd_addr = '0; cmd_beats = '0; out_ready = 0;
    for (int b = 0; b < 4096; b++) u_mem.mem[b] = pattern(b);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      automatic int n = 1 + $urandom_range(100);
      automatic int b0 = (t % 4 == 0) ? 128 * (1 + $urandom_range(20)) - $urandom_range(20)
                                       : $urandom_range(3900);
      read_cmd(b0, n, 1, cyc);
    end
    // rate: memory without stalls, consumer always ready
    u_mem.stall_pct = 0;
    read_cmd(1000, 64, 0, cyc);
    chk(cyc <= 64 + 8, $sformatf("64 beats took %0d cycles", cyc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
