// axi_burst_reader -- "fetch data and create stream": AXI4 read master that
// turns a (start address, beat count) command into a stream of 256-bit beats.
//
// The accelerator fetches every parameter and data array from the shared DDR
// through 256-bit AXI4 memory-mapped bursts and hands the beats on as a
// stream. This module accepts one command at a time (cmd_valid/cmd_ready),
// cuts it into INCR bursts of at most MAX_BURST beats of 32 bytes that never
// cross a 4 KiB boundary (an AXI4 rule), and issues the read addresses back
// to back without waiting for data, so several bursts may be outstanding.
// Read data is passed straight through: out_valid = rvalid, rready =
// out_ready, so the consumer's back-pressure reaches the interconnect with no
// added latency. busy stays high from command acceptance until the last beat
// of the command has left on the stream. The base address must be 32-byte
// aligned. Only one ID is used, so data returns in request order.
// The burst length and the outstanding-address scheme are this design's
// choice; the original only states 256-bit bursts.
module axi_burst_reader
  import bcpnn_pkg::*;
#(
  parameter int MAX_BURST = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // command
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  addr_t       cmd_addr,
  input  logic [23:0] cmd_beats,
  output logic        busy,
  // AXI4 read address channel
  output logic        arvalid,
  input  logic        arready,
  output axi_ax_t     ar,
  // AXI4 read data channel
  input  logic        rvalid,
  output logic        rready,
  input  axi_r_t      r,
  // output stream
  output logic        out_valid,
  input  logic        out_ready,
  output beat_t       out_data
);
  addr_t       next_addr;
  logic [23:0] ar_left;     // beats not yet requested
  logic [23:0] r_left;      // beats not yet delivered
  logic [23:0] len_beats;
  logic [8:0]  to_4k;

  // beats left before the next 4 KiB boundary (1..128)
  assign to_4k = 9'd128 - 9'(next_addr[11:5]);

  always_comb begin
    len_beats = ar_left;
    if (len_beats > 24'(MAX_BURST)) len_beats = 24'(MAX_BURST);
    if (len_beats > 24'(to_4k))     len_beats = 24'(to_4k);
  end

  assign cmd_ready = (r_left == '0);
  assign busy      = (r_left != '0);
  assign arvalid   = (ar_left != '0);
  assign ar.addr   = next_addr;
  assign ar.len    = 8'(len_beats - 1'b1);

  assign out_valid = rvalid && busy;
  assign rready    = out_ready && busy;
  assign out_data  = r.data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_addr <= '0;
      ar_left   <= '0;
      r_left    <= '0;
    end else begin
      if (cmd_valid && cmd_ready) begin
        next_addr <= cmd_addr;
        ar_left   <= cmd_beats;
        r_left    <= cmd_beats;
      end else begin
        if (arvalid && arready) begin
          next_addr <= next_addr + addr_t'(len_beats * BEAT_BYTES);
          ar_left   <= ar_left - len_beats;
        end
        if (rvalid && rready) r_left <= r_left - 1'b1;
      end
    end
  end

  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (arvalid && !arready) |=> (arvalid && $stable(ar)));
endmodule
