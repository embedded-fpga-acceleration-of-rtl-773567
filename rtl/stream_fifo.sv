// stream_fifo -- synchronous FIFO channel between two streaming stages.
//
// Stages of the accelerator pass data through valid/ready stream channels
// (AXI-stream style: a word moves on a cycle where valid and ready are both
// high). This FIFO decouples two such stages. It is a circular buffer of
// DEPTH words with separate read and write pointers and an occupancy count;
// in_ready is low only when the buffer is full, out_valid is high whenever it
// holds a word, and out_data shows the oldest word (first-word fall-through).
// A word written in cycle t can be read in cycle t+1. Simultaneous push and
// pop are allowed when full or empty-but-one. The depth is a parameter: the
// original design sized its FIFOs by co-simulation; here the depth is chosen
// by the instantiating module.
module stream_fifo #(
  parameter int WIDTH = 256,
  parameter int DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp, rp;
  logic             push, pop;

  assign in_ready  = (count != ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + ($bits(count))'(push) - ($bits(count))'(pop);
    end
  end

  // A stream producer may not withdraw or change a word it offered.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (out_valid && !out_ready) |=> (out_valid && $stable(out_data));
  endproperty
  a_hold: assert property (p_hold);
endmodule
