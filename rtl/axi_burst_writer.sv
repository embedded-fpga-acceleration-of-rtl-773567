// axi_burst_writer -- AXI4 write master that stores a stream of 256-bit
// beats to DDR from a (start address, beat count) command.
//
// Results of the accelerator (updated traces, updated biases and weights,
// per-sample outputs) are written back to the shared DDR through 256-bit
// AXI4 bursts. After a command is accepted, the module issues write
// addresses for INCR bursts of at most MAX_BURST beats that never cross a
// 4 KiB boundary. The write data channel runs independently: each stream
// beat is forwarded as a W beat (all byte strobes set) and WLAST is raised on
// the last beat of each burst, found by repeating the same burst-length rule
// on a second address counter. Write responses are counted; busy falls once
// every burst of the command has been answered, so a following read of the
// same region sees the new data. Base address must be 32-byte aligned.
// Burst length and the response handling are this design's choice.
module axi_burst_writer
  import bcpnn_pkg::*;
#(
  parameter int MAX_BURST = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  addr_t       cmd_addr,
  input  logic [23:0] cmd_beats,
  output logic        busy,
  // input stream
  input  logic        in_valid,
  output logic        in_ready,
  input  beat_t       in_data,
  // AXI4 write address channel
  output logic        awvalid,
  input  logic        awready,
  output axi_ax_t     aw,
  // AXI4 write data channel
  output logic        wvalid,
  input  logic        wready,
  output axi_w_t      w,
  // AXI4 write response channel (response code ignored)
  input  logic        bvalid,
  output logic        bready
);
  addr_t       aw_addr, w_addr;
  logic [23:0] aw_left, w_left;
  logic [15:0] b_pending;      // bursts issued and not yet answered
  logic [23:0] aw_len, w_len;
  logic [8:0]  w_pos;          // beat index within the current W burst

  function automatic logic [23:0] burst_len(input addr_t a, input logic [23:0] left);
    logic [23:0] l;
    logic [8:0]  to_4k;
    to_4k = 9'd128 - 9'(a[11:5]);
    l = left;
    if (l > 24'(MAX_BURST)) l = 24'(MAX_BURST);
    if (l > 24'(to_4k))     l = 24'(to_4k);
    return l;
  endfunction

  assign aw_len    = burst_len(aw_addr, aw_left);
  assign w_len     = burst_len(w_addr, w_left);
  assign busy      = (aw_left != '0) || (w_left != '0) || (b_pending != '0);
  assign cmd_ready = !busy;

  assign awvalid = (aw_left != '0);
  assign aw.addr = aw_addr;
  assign aw.len  = 8'(aw_len - 1'b1);

  assign wvalid   = in_valid && (w_left != '0);
  assign in_ready = wready && (w_left != '0);
  assign w.data   = in_data;
  assign w.strb   = '1;
  assign w.last   = (24'(w_pos) == w_len - 1'b1);
  assign bready   = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_addr   <= '0;
      w_addr    <= '0;
      aw_left   <= '0;
      w_left    <= '0;
      w_pos     <= '0;
      b_pending <= '0;
    end else if (cmd_valid && cmd_ready) begin
      aw_addr <= cmd_addr;
      w_addr  <= cmd_addr;
      aw_left <= cmd_beats;
      w_left  <= cmd_beats;
      w_pos   <= '0;
    end else begin
      if (awvalid && awready) begin
        aw_addr <= aw_addr + addr_t'(aw_len * BEAT_BYTES);
        aw_left <= aw_left - aw_len;
      end
      if (wvalid && wready) begin
        if (w.last) begin
          w_pos  <= '0;
          w_addr <= w_addr + addr_t'(w_len * BEAT_BYTES);
          w_left <= w_left - w_len;
        end else begin
          w_pos <= w_pos + 1'b1;
        end
      end
      b_pending <= b_pending + ((awvalid && awready) ? 16'd1 : 16'd0)
                             - ((bvalid && bready) ? 16'd1 : 16'd0);
    end
  end

  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (awvalid && !awready) |=> (awvalid && $stable(aw)));
endmodule
