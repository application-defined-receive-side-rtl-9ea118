// pkt_buffer: the RSD's transient packet buffer.
//
// A first-word-fall-through FIFO of DEPTH entries of WIDTH bits. The RSD
// stores every beat of the packet here while the Matcher works on the copy in
// the BytePipe, and releases the beats with the dispatch result. The paper
// names the buffer and its role but not its size; DEPTH = 32 beats (2 KiB)
// holds a whole 1514-byte frame and is this design's choice.
//
// Interface: valid/ready on both sides; a beat written in cycle t can leave in
// cycle t+1. `level` counts the stored entries.
module pkt_buffer #(
  parameter int unsigned WIDTH = 577,
  parameter int unsigned DEPTH = 32
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [WIDTH-1:0]         in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [WIDTH-1:0]         out_data,
  output logic [$clog2(DEPTH):0]   level
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic [AW:0]      n;

  assign in_ready  = (n != (AW+1)'(DEPTH));
  assign out_valid = (n != '0);
  assign out_data  = mem[rp];
  assign level     = n;

  logic push, pop;
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0;
      rp <= '0;
      n  <= '0;
    end else begin
      if (push) begin
        mem[wp] <= in_data;
        wp <= wp + 1'b1;
      end
      if (pop) rp <= rp + 1'b1;
      n <= n + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (rst) in_valid && !in_ready |-> n == (AW+1)'(DEPTH));
endmodule
