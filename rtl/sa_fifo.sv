// Synchronous FIFO with valid/ready ports: the point-to-point channel between kernels of the array.
//
// The source design connects its kernels with FIFO channels of configurable depth and width; this
// module is that channel. It is used as the loaders' read-data buffer and as each PE's drain cache.
// Storage is a DEPTH-entry array addressed by wrapping read and write pointers; `count` gives the
// occupancy. A word is written when in_valid && in_ready and read when out_valid && out_ready;
// both may happen in the same cycle. The head is visible on out_data while out_valid is high
// (first-word fall-through), so a word written in cycle t can be read in cycle t+1. Reset empties
// the FIFO (synchronous, active low). The handshake and the fall-through behaviour are this design's choice.
module sa_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [WIDTH-1:0]           in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [WIDTH-1:0]           out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             do_wr, do_rd;

  assign in_ready  = (count < ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr];
  assign do_wr     = in_valid && in_ready;
  assign do_rd     = out_valid && out_ready;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_wr) wptr <= inc(wptr);
      if (do_rd) rptr <= inc(rptr);
      if (do_wr && !do_rd) count <= count + 1'b1;
      else if (do_rd && !do_wr) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= in_data;
  end

  // Occupancy can never exceed the depth.
  assert property (@(posedge clk) disable iff (!rst_n) count <= ($clog2(DEPTH+1))'(DEPTH))
    else $error("sa_fifo: occupancy above depth");
endmodule
