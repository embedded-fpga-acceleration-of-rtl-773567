// axi_mem_model -- behavioural model of the DDR memory seen by the kernel
// (not synthesizable, testbench only). One AXI4 read port and two AXI4 write
// ports share one array of 256-bit beats, addressed in bytes (beat = addr/32).
// Read and write address requests are queued; read data and write
// acceptance are throttled at random so that the kernel sees back-pressure.
// Each write burst is answered on B one cycle after its last W beat.
module axi_mem_model
  import bcpnn_pkg::*;
#(
  parameter int MEM_BEATS = 16384,
  parameter int STALL_PCT = 25
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    arvalid,
  output logic    arready,
  input  axi_ax_t ar,
  output logic    rvalid,
  input  logic    rready,
  output axi_r_t  r,
  input  logic    awvalid [2],
  output logic    awready [2],
  input  axi_ax_t aw      [2],
  input  logic    wvalid  [2],
  output logic    wready  [2],
  input  axi_w_t  w       [2],
  output logic    bvalid  [2],
  input  logic    bready  [2]
);
  beat_t   mem [MEM_BEATS];
  axi_ax_t rq[$];
  axi_ax_t wq0[$];
  axi_ax_t wq1[$];
  int      rbeat;
  int      wbeat [2];
  int      ar_count;
  int      stall_pct = STALL_PCT;   // may be changed by a testbench
  int      split_count;   // bursts cut short at a 4 KiB boundary

  initial begin
    rvalid = 0; r = '0; rbeat = 0; ar_count = 0; split_count = 0;
    for (int p = 0; p < 2; p++) begin bvalid[p] = 0; wbeat[p] = 0; end
  end

  // all ready signals are registered, so the kernel and this model never
  // race on a queue that changes at the clock edge
  initial begin
    arready = 0;
    for (int p = 0; p < 2; p++) begin awready[p] = 0; wready[p] = 0; end
  end

  always @(posedge clk) begin
    // read address
    if (arvalid && arready) begin
      rq.push_back(ar);
      ar_count++;
      if (((ar.addr / BEAT_BYTES) + ar.len + 1) % 128 == 0 && ar.len != 15) split_count++;
    end
    // read data
    if (rvalid && rready) begin
      rbeat++;
      if (r.last) begin void'(rq.pop_front()); rbeat = 0; end
    end
    arready <= (rq.size() < 3);
    if (rvalid && !rready) begin
      // hold the offered beat
    end else if (rq.size() > 0 && ($urandom_range(99) >= stall_pct)) begin
      rvalid <= 1;
      r.data <= mem[(rq[0].addr / BEAT_BYTES) + rbeat];
      r.last <= (rbeat == rq[0].len);
    end else begin
      rvalid <= 0;
    end
  end

  // write ports
  always @(posedge clk) begin
    for (int p = 0; p < 2; p++) begin
      if (bvalid[p] && bready[p]) bvalid[p] <= 0;
      if (awvalid[p] && awready[p]) begin
        if (p == 0) wq0.push_back(aw[p]); else wq1.push_back(aw[p]);
      end
      if (wvalid[p] && wready[p]) begin
        axi_ax_t a;
        if (p == 0) a = wq0[0]; else a = wq1[0];
        mem[(a.addr / BEAT_BYTES) + wbeat[p]] = w[p].data;
        if (w[p].last != (wbeat[p] == int'(a.len))) $display("ERROR: WLAST misplaced on port %0d", p);
        if (w[p].last) begin
          wbeat[p] = 0;
          bvalid[p] <= 1;
          if (p == 0) void'(wq0.pop_front()); else void'(wq1.pop_front());
        end else wbeat[p]++;
      end
      awready[p] <= ((p == 0) ? wq0.size() : wq1.size()) < 3;
      wready[p]  <= ($urandom_range(99) >= stall_pct) && (((p == 0) ? wq0.size() : wq1.size()) > 0);
    end
  end
endmodule
