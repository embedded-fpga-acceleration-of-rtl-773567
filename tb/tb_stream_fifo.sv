// tb_stream_fifo -- random pushes and pops against a queue model.
// Checks order and data of every word, that in_ready falls exactly when DEPTH
// words are held, that out_valid tracks occupancy, and the one-cycle
// write-to-read latency of a word written into an empty FIFO.
module tb_stream_fifo;
  localparam int W = 32, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];

  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

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

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // latency: push one word into the empty FIFO
    @(negedge clk); in_valid = 1; in_data = 32'hA5A5_0001;
    @(negedge clk); in_valid = 0;
    chk(out_valid && out_data == 32'hA5A5_0001, "word visible one cycle after write");
    out_ready = 1; @(negedge clk); out_ready = 0;
    chk(!out_valid, "empty after pop");
    // fill completely
    for (int i = 0; i < D + 2; i++) begin
      in_valid = 1; in_data = i;
      @(negedge clk);
    end
    in_valid = 0;
    chk(!in_ready && count == D, "full after DEPTH pushes");
    for (int i = 0; i < D; i++) begin
      chk(out_data == i, $sformatf("fill order %0d", i));
      out_ready = 1; @(negedge clk);
    end
    out_ready = 0;
    chk(!out_valid, "empty after draining");
    // random traffic
    for (int t = 0; t < 4000; t++) begin
      in_valid  = ($urandom_range(99) < 60);
      in_data   = $urandom;
      out_ready = ($urandom_range(99) < 50);
      #1;
      chk(in_ready == (q.size() < D), "in_ready matches occupancy");
      chk(out_valid == (q.size() > 0), "out_valid matches occupancy");
      if (out_valid && out_ready) begin
        chk(out_data == q[0], "data order");
        void'(q.pop_front());
      end
      if (in_valid && in_ready) q.push_back(in_data);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
