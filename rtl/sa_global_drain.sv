// Global drain: collects finished output blocks, re-orders them, adds bias, applies the activation
// and writes them to external memory.
//
// Results reach the global drain one word at a time from the OMod chain, in drain order: column by
// column, and inside a column PE row by PE row, each PE's INTERLEAVE x INTERLEAVE sub-block in row-major
// order. That order is not contiguous in the output matrix, so the input cache (one output block,
// ROWS*I x COLS*I words) stores each word at its row-major place. While a block fills, the bias cache
// fetches the COLS*I bias words of the block's output columns from memory (bias_base + n*COLS*I);
// with bias disabled the cache is preloaded with zeros at job start and memory is never read. Once
// the block and its bias are complete, the block is read out in row-major order through the bias
// adder and the activation mux (ReLU, or bypass when act_en is low) and written contiguously:
// output block b = m*n_blocks + n goes to out_base + b*ROWS*I*COLS*I, row-major inside the block.
//
// Input cache, bias cache, adder, f(x) and the activation mux are the source design's; ReLU as f(x),
// the single-buffered input cache and the memory layout of the results are this design's choices.
// Ports: valid/ready input stream; bias reads one word per request with in-order responses that
// cannot be refused; one word per write. `done` rises after the last block of the job is written.
// Timing: one word per cycle in, one word per cycle out; a block is accepted only after the previous
// one has been written (back-pressure through in_ready).
module sa_global_drain
  import sa_pkg::*;
#(
  parameter int unsigned ROWS       = 4,
  parameter int unsigned COLS       = 4,
  parameter int unsigned INTERLEAVE = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] m_blocks,
  input  logic [15:0] n_blocks,
  input  logic        bias_en,
  input  logic        act_en,
  input  logic [31:0] bias_base,
  input  logic [31:0] out_base,
  // results from the OMod chain
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_data,
  // bias read port
  output logic        bias_req_valid,
  input  logic        bias_req_ready,
  output logic [31:0] bias_req_addr,
  input  logic        bias_rsp_valid,
  input  logic [31:0] bias_rsp_data,
  // result write port
  output logic        wr_valid,
  input  logic        wr_ready,
  output logic [31:0] wr_addr,
  output logic [31:0] wr_data,
  output logic        done
);
  localparam int unsigned IL    = INTERLEAVE;
  localparam int unsigned NCOL  = COLS * IL;            // block width
  localparam int unsigned NWORD = ROWS * IL * NCOL;     // block size
  localparam int unsigned WW    = $clog2(NWORD + 1);
  localparam int unsigned BW    = $clog2(NCOL + 1);

  typedef enum logic [1:0] {IDLE, FILL, WRITE} state_t;
  state_t state;

  logic [31:0] in_cache   [NWORD];
  logic [31:0] bias_cache [NCOL];

  // arrival position: column c, PE row r, sub-block row i, sub-block column j
  logic [$clog2(IL+1)-1:0]   pos_j, pos_i;
  logic [$clog2(ROWS+1)-1:0] pos_r;
  logic [$clog2(COLS+1)-1:0] pos_c;
  logic [WW-1:0] a_idx, wr_idx;
  logic [WW-1:0] filled;
  logic [BW-1:0] b_issued, b_got, wr_col;
  logic [31:0]   blk, total;
  logic [15:0]   n_i;
  logic          block_in, bias_in;
  logic [31:0]   sum, act_out;

  assign total    = 32'(m_blocks) * 32'(n_blocks);
  assign a_idx    = WW'((32'(pos_r) * IL + 32'(pos_i)) * NCOL + 32'(pos_c) * IL + 32'(pos_j));
  assign block_in = (filled == WW'(NWORD));
  assign bias_in  = (b_got == BW'(NCOL));
  assign in_ready = (state == FILL) && !block_in;

  assign bias_req_valid = (state == FILL) && bias_en && (b_issued != BW'(NCOL));
  assign bias_req_addr  = bias_base + 32'(n_i) * NCOL + 32'(b_issued);

  // Bias add and activation mux.
  fp32_add u_bias_add (.a(in_cache[wr_idx]), .b(bias_cache[wr_col]), .y(sum));
  assign act_out  = act_en ? fp32_relu(sum) : sum;
  assign wr_valid = (state == WRITE);
  assign wr_addr  = out_base + blk * NWORD + 32'(wr_idx);
  assign wr_data  = act_out;

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) in_cache[a_idx] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (state == IDLE && start && !bias_en)
      for (int k = 0; k < NCOL; k++) bias_cache[k] <= FP32_ZERO;
    else if (bias_rsp_valid && bias_en)
      bias_cache[b_got] <= bias_rsp_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= IDLE;
      done  <= 1'b0;
      pos_j <= '0; pos_i <= '0; pos_r <= '0; pos_c <= '0;
      filled <= '0; b_issued <= '0; b_got <= '0;
      wr_idx <= '0; wr_col <= '0; blk <= '0; n_i <= '0;
    end else begin
      case (state)
        IDLE: if (start) begin
          state    <= FILL;
          done     <= 1'b0;
          blk      <= '0;
          n_i      <= '0;
          filled   <= '0;
          b_issued <= bias_en ? '0 : BW'(NCOL);
          b_got    <= bias_en ? '0 : BW'(NCOL);
        end
        FILL: begin
          if (in_valid && in_ready) begin
            filled <= filled + 1'b1;
            if (pos_j != ($bits(pos_j))'(IL - 1)) pos_j <= pos_j + 1'b1;
            else begin
              pos_j <= '0;
              if (pos_i != ($bits(pos_i))'(IL - 1)) pos_i <= pos_i + 1'b1;
              else begin
                pos_i <= '0;
                if (pos_r != ($bits(pos_r))'(ROWS - 1)) pos_r <= pos_r + 1'b1;
                else begin
                  pos_r <= '0;
                  pos_c <= (pos_c == ($bits(pos_c))'(COLS - 1)) ? '0 : pos_c + 1'b1;
                end
              end
            end
          end
          if (bias_req_valid && bias_req_ready) b_issued <= b_issued + 1'b1;
          if (bias_rsp_valid && bias_en) b_got <= b_got + 1'b1;
          if (block_in && bias_in) begin
            state  <= WRITE;
            wr_idx <= '0;
            wr_col <= '0;
          end
        end
        WRITE: if (wr_ready) begin
          wr_col <= (wr_col == BW'(NCOL - 1)) ? '0 : wr_col + 1'b1;
          if (wr_idx != WW'(NWORD - 1)) wr_idx <= wr_idx + 1'b1;
          else begin
            filled <= '0;
            blk    <= blk + 32'd1;
            n_i    <= (n_i == n_blocks - 16'd1) ? 16'd0 : n_i + 16'd1;
            b_issued <= bias_en ? '0 : BW'(NCOL);
            b_got    <= bias_en ? '0 : BW'(NCOL);
            if (blk + 32'd1 == total) begin
              state <= IDLE;
              done  <= 1'b1;
            end else begin
              state <= FILL;
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  // Bias responses only arrive for requests of the current block.
  assert property (@(posedge clk) disable iff (!rst_n) bias_rsp_valid |-> (state == FILL) && bias_en && (b_got < b_issued))
    else $error("sa_global_drain: unexpected bias response");
endmodule
