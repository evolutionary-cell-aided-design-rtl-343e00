// Output module (OMod): one link of the output chain between the PE grid and the global drain.
//
// There is one OMod per grid column, fed by the top PE of that column; the OMods form a daisy chain
// whose end (column 0) feeds the global drain. The path is one FP32 word wide, as in the source
// design. For every output block an OMod first passes on the ROWS*I*I results of its own column, in
// the order the column drains them (row 0's sub-block first), then the (COLS-1-COL)*ROWS*I*I
// results arriving along the chain from the OMods beyond it, then starts again. The blocks arrive at
// the global drain column by column, which is why the global drain must re-order them. The
// column-then-chain order and the output register are this design's choices.
//
// Interface: three valid/ready word streams. Timing: a registered output stage that can take a word
// every cycle; a word accepted at edge t is offered on out_* from edge t on.
module sa_omod #(
  parameter int unsigned COL        = 0,
  parameter int unsigned COLS       = 4,
  parameter int unsigned ROWS       = 4,
  parameter int unsigned INTERLEAVE = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        col_valid,
  output logic        col_ready,
  input  logic [31:0] col_data,
  input  logic        chain_valid,
  output logic        chain_ready,
  input  logic [31:0] chain_data,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] out_data
);
  localparam int unsigned NOWN  = ROWS * INTERLEAVE * INTERLEAVE;
  localparam int unsigned NPASS = (COLS - 1 - COL) * NOWN;

  logic [$clog2(NOWN + NPASS + 1)-1:0] cnt;
  logic own, take, sel_valid;
  logic [31:0] sel_data;

  assign own         = (cnt < ($bits(cnt))'(NOWN));
  assign sel_valid   = own ? col_valid : chain_valid;
  assign sel_data    = own ? col_data  : chain_data;
  assign take        = sel_valid && (!out_valid || out_ready);
  assign col_ready   = own  && (!out_valid || out_ready);
  assign chain_ready = !own && (!out_valid || out_ready);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (take) begin
        out_valid <= 1'b1;
        out_data  <= sel_data;
        cnt       <= (cnt == ($bits(cnt))'(NOWN + NPASS - 1)) ? '0 : cnt + 1'b1;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end
endmodule
