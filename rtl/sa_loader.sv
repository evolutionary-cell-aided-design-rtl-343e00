// Matrix loader: reads matrix blocks from external memory and streams them into a memory-module chain.
//
// Two loaders feed the array, one for matrix A (row side) and one for the host-transposed matrix B
// (column side). Both read blocks that lie contiguously in memory. A block is LINES*INTERLEAVE lines
// of VEC*SCALE words, stored line after line (this layout inside a block is this design's choice).
// The job walks output blocks m = 0..m_blocks-1, n = 0..n_blocks-1 and, for each, common blocks
// k = 0..k_blocks-1; the A loader (is_a = 1) reads block (m, k), at index m*k_blocks + k, and the B
// loader reads block (k, n), at index n*k_blocks + k. Each block is sent line by line, each line as
// SCALE vectors, so the first memory module of the chain receives its INTERLEAVE lines first.
// Every vector is tagged with the block's place in the output sequence: first (k = 0) and
// last (k = k_blocks-1). After the last block the loader sends one flush block of zero vectors
// without reading memory, as the source design's loaders do at the end of a run.
//
// Memory port: one request reads VEC consecutive 32-bit words at word address mem_req_addr; the
// responses come back in order, mem_rsp_valid for one cycle each, and cannot be refused. At most
// OUTSTANDING requests are in flight or buffered, so the response buffer never overflows.
// Output: a valid/ready stream; `done` rises once the flush block has been sent and stays high
// until the next `start`.
module sa_loader
  import sa_pkg::*;
#(
  parameter int unsigned LINES       = 4,
  parameter int unsigned VEC         = 8,
  parameter int unsigned INTERLEAVE  = 8,
  parameter int unsigned SCALE       = 8,
  parameter int unsigned OUTSTANDING = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic                  is_a,
  input  logic [15:0]           m_blocks,
  input  logic [15:0]           n_blocks,
  input  logic [15:0]           k_blocks,
  input  logic [31:0]           base,
  // memory read port
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output logic [31:0]           mem_req_addr,
  input  logic                  mem_rsp_valid,
  input  logic [VEC-1:0][31:0]  mem_rsp_data,
  // vector stream to the memory-module chain
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [VEC-1:0][31:0]  out_data,
  output blk_tag_t              out_tag,
  output logic                  done
);
  localparam int unsigned NLINES    = LINES * INTERLEAVE;
  localparam int unsigned LINE_W    = VEC * SCALE;
  localparam int unsigned BLOCK_W   = NLINES * LINE_W;
  localparam int unsigned BLOCK_VEC = NLINES * SCALE;
  localparam int unsigned CW        = $clog2(OUTSTANDING + 1);

  typedef enum logic [1:0] {IDLE, READ, FLUSH, WAIT_DONE} state_t;
  state_t state;

  logic [15:0] m_i, n_i, k_i;
  logic [$clog2(NLINES)-1:0] line_i;
  logic [$clog2(SCALE+1)-1:0] s_i;
  logic [$clog2(BLOCK_VEC+1)-1:0] flush_i;
  logic        issue, pop;
  logic        tag_in_ready, tag_valid, data_valid;
  blk_tag_t    tag_in, tag_head;
  logic [31:0] blk_idx;
  logic [CW-1:0] tag_count;
  logic [$clog2(OUTSTANDING+1)-1:0] data_count;
  logic [VEC*32-1:0] data_head;
  logic        rsp_space;

  // Tag FIFO: one entry per issued request (or flush vector), popped with the data.
  sa_fifo #(.WIDTH($bits(blk_tag_t)), .DEPTH(OUTSTANDING)) u_tags (
    .clk, .rst_n,
    .in_valid(issue), .in_ready(tag_in_ready), .in_data(tag_in),
    .out_valid(tag_valid), .out_ready(pop), .out_data(tag_head), .count(tag_count));

  // Read-data FIFO: responses land here; space is guaranteed by the tag FIFO limit.
  sa_fifo #(.WIDTH(VEC * 32), .DEPTH(OUTSTANDING)) u_data (
    .clk, .rst_n,
    .in_valid(mem_rsp_valid), .in_ready(rsp_space), .in_data(mem_rsp_data),
    .out_valid(data_valid), .out_ready(pop && !tag_head.flush), .out_data(data_head),
    .count(data_count));

  always_comb begin
    blk_idx       = is_a ? (32'(m_i) * 32'(k_blocks) + 32'(k_i)) : (32'(n_i) * 32'(k_blocks) + 32'(k_i));
    mem_req_addr  = base + blk_idx * 32'(BLOCK_W) + 32'(line_i) * 32'(LINE_W) + 32'(s_i) * 32'(VEC);
    mem_req_valid = (state == READ) && tag_in_ready;
    tag_in.first  = (state == FLUSH) ? 1'b1 : (k_i == 16'd0);
    tag_in.last   = (state == FLUSH) ? 1'b0 : (k_i == k_blocks - 16'd1);
    tag_in.flush  = (state == FLUSH);
    issue         = ((state == READ) && tag_in_ready && mem_req_ready) ||
                    ((state == FLUSH) && tag_in_ready);
    out_valid     = tag_valid && (tag_head.flush || data_valid);
    out_data      = tag_head.flush ? '0 : data_head;
    out_tag       = tag_head;
    pop           = out_valid && out_ready;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= IDLE;
      m_i     <= '0; n_i <= '0; k_i <= '0;
      line_i  <= '0; s_i <= '0; flush_i <= '0;
      done    <= 1'b0;
    end else begin
      case (state)
        IDLE: if (start) begin
          state  <= READ;
          m_i    <= '0; n_i <= '0; k_i <= '0;
          line_i <= '0; s_i <= '0; flush_i <= '0;
          done   <= 1'b0;
        end
        READ: if (issue) begin
          if (s_i != $bits(s_i)'(SCALE - 1)) s_i <= s_i + 1'b1;
          else begin
            s_i <= '0;
            if (line_i != $bits(line_i)'(NLINES - 1)) line_i <= line_i + 1'b1;
            else begin
              line_i <= '0;
              if (k_i != k_blocks - 16'd1) k_i <= k_i + 16'd1;
              else begin
                k_i <= '0;
                if (n_i != n_blocks - 16'd1) n_i <= n_i + 16'd1;
                else begin
                  n_i <= '0;
                  if (m_i != m_blocks - 16'd1) m_i <= m_i + 16'd1;
                  else state <= FLUSH;
                end
              end
            end
          end
        end
        FLUSH: if (issue) begin
          if (flush_i == $bits(flush_i)'(BLOCK_VEC - 1)) state <= WAIT_DONE;
          flush_i <= flush_i + 1'b1;
        end
        WAIT_DONE: if (tag_count == '0) begin
          state <= IDLE;
          done  <= 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

  // Responses only come for requests in flight, so the data FIFO never holds more than the tags.
  assert property (@(posedge clk) disable iff (!rst_n) 32'(data_count) <= 32'(tag_count))
    else $error("sa_loader: more read data than requests");
  assert property (@(posedge clk) disable iff (!rst_n) mem_rsp_valid |-> rsp_space)
    else $error("sa_loader: read response without buffer space");
endmodule
