// FP32 2D systolic array for dense layers: C = act(A x B + bias) on blocked matrices in memory.
//
// Structure (ROWS x COLS grid, VEC-wide data path):
//   loader A -> A MMod 0 -> A MMod 1 -> ... (one per grid row, feeding the row from the left)
//   loader B -> B MMod 0 -> B MMod 1 -> ... (one per grid column, feeding the column from the top)
//   PE(r,c) gets A from PE(r,c-1) and B from PE(r-1,c) and forwards both; results drain up each
//   column into that column's OMod; the OMods form a chain ending at the global drain, which adds
//   bias, applies ReLU and writes the output blocks to memory.
// A is stored as blocks of ROWS*INTERLEAVE rows x VEC*SCALE columns, B (transposed by the host) as
// blocks of COLS*INTERLEAVE rows x VEC*SCALE columns, each block contiguous and row-major. A job
// computes m_blocks x n_blocks output blocks of ROWS*I x COLS*I words, each the sum over k_blocks
// common blocks. The grid parameters are the source design's SYS_ROWS, SYS_COLS, SYS_VEC,
// INTERLEAVE and SCALE; the defaults are its (4, 4, 8, 8, 8) configuration.
//
// Pass sequencer (this design's own; the source design decouples its kernels with FIFO channels
// instead): one "pass" plays one block pair from the MMods through the grid in SCALE*I*I cycles.
// A pass starts, by a simultaneous `swap` of all MMods, when every MMod holds a complete block and
// no MMod is still playing the previous one. A pass that ends an output block (tag `last`) must
// also find the whole grid idle with every PE drain cache empty, because it fills those caches;
// waiting for that is the drain stall, counted in stall_cycles. After the last block the loaders
// send a flush block of zeros, which clears the accumulators; `done` rises when the flush pass has
// left the grid and the global drain has written the last block.
//
// Memory ports: the two loaders read one VEC-word vector per request, the global drain reads bias
// words and writes result words; all addresses are 32-bit word addresses and read responses
// return in order and cannot be refused. The source design shares one DDR bank among them.
// Throughput: one vector pair per cycle into the grid while a pass plays, i.e. ROWS*COLS*VEC
// multiply-adds per cycle; back-to-back passes start SCALE*I*I+1 cycles apart (one turnaround
// cycle of the sequencer per pass, 1/513 at the default size).
// The drain links between PEs of a column are declared inside each PE's generate scope: the drain
// merge in a PE passes valid/data combinationally from the PE below, so a single array holding
// all links of a column would look like a combinational loop to the tools although none exists.
module ecad_systolic_array
  import sa_pkg::*;
#(
  parameter int unsigned ROWS       = 4,
  parameter int unsigned COLS       = 4,
  parameter int unsigned VEC        = 8,
  parameter int unsigned INTERLEAVE = 8,
  parameter int unsigned SCALE      = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // job
  input  logic                 start,
  input  logic [15:0]          m_blocks,
  input  logic [15:0]          n_blocks,
  input  logic [15:0]          k_blocks,
  input  logic [31:0]          a_base,
  input  logic [31:0]          b_base,
  input  logic [31:0]          bias_base,
  input  logic [31:0]          c_base,
  input  logic                 bias_en,
  input  logic                 act_en,
  output logic                 done,
  output logic                 running,
  // loader A memory port
  output logic                 a_rd_req_valid,
  input  logic                 a_rd_req_ready,
  output logic [31:0]          a_rd_req_addr,
  input  logic                 a_rd_rsp_valid,
  input  logic [VEC-1:0][31:0] a_rd_rsp_data,
  // loader B memory port
  output logic                 b_rd_req_valid,
  input  logic                 b_rd_req_ready,
  output logic [31:0]          b_rd_req_addr,
  input  logic                 b_rd_rsp_valid,
  input  logic [VEC-1:0][31:0] b_rd_rsp_data,
  // bias memory port
  output logic                 bias_rd_req_valid,
  input  logic                 bias_rd_req_ready,
  output logic [31:0]          bias_rd_req_addr,
  input  logic                 bias_rd_rsp_valid,
  input  logic [31:0]          bias_rd_rsp_data,
  // result write port
  output logic                 wr_valid,
  input  logic                 wr_ready,
  output logic [31:0]          wr_addr,
  output logic [31:0]          wr_data,
  // activity counters
  output logic [31:0]          pass_count,
  output logic [31:0]          stall_cycles
);
  typedef logic [VEC-1:0][31:0] vec_t;

  logic [15:0] k_vecs;
  assign k_vecs = 16'(32'(k_blocks) * SCALE);

  // ------------------------------------------------------------------ loaders
  logic     la_valid, la_ready, la_done, lb_valid, lb_ready, lb_done;
  vec_t     la_data, lb_data;
  blk_tag_t la_tag, lb_tag;

  sa_loader #(.LINES(ROWS), .VEC(VEC), .INTERLEAVE(INTERLEAVE), .SCALE(SCALE)) u_loader_a (
    .clk, .rst_n, .start, .is_a(1'b1), .m_blocks, .n_blocks, .k_blocks, .base(a_base),
    .mem_req_valid(a_rd_req_valid), .mem_req_ready(a_rd_req_ready), .mem_req_addr(a_rd_req_addr),
    .mem_rsp_valid(a_rd_rsp_valid), .mem_rsp_data(a_rd_rsp_data),
    .out_valid(la_valid), .out_ready(la_ready), .out_data(la_data), .out_tag(la_tag), .done(la_done));

  sa_loader #(.LINES(COLS), .VEC(VEC), .INTERLEAVE(INTERLEAVE), .SCALE(SCALE)) u_loader_b (
    .clk, .rst_n, .start, .is_a(1'b0), .m_blocks, .n_blocks, .k_blocks, .base(b_base),
    .mem_req_valid(b_rd_req_valid), .mem_req_ready(b_rd_req_ready), .mem_req_addr(b_rd_req_addr),
    .mem_rsp_valid(b_rd_rsp_valid), .mem_rsp_data(b_rd_rsp_data),
    .out_valid(lb_valid), .out_ready(lb_ready), .out_data(lb_data), .out_tag(lb_tag), .done(lb_done));

  // ------------------------------------------------------------------ MMod chains
  logic                 swap;
  // A side, index r; chain link r is the input of MMod r
  logic     [ROWS:0]    ac_valid, ac_ready;
  vec_t                 ac_data [ROWS+1];
  blk_tag_t             ac_tag  [ROWS+1];
  logic     [ROWS-1:0]  am_full, am_rd, am_busy, am_pv, am_pb, am_pf;
  blk_tag_t             am_wtag [ROWS];
  vec_t                 am_pd   [ROWS];
  // B side, index c
  logic     [COLS:0]    bc_valid, bc_ready;
  vec_t                 bc_data [COLS+1];
  blk_tag_t             bc_tag  [COLS+1];
  logic     [COLS-1:0]  bm_full, bm_rd, bm_busy, bm_pv, bm_pb, bm_pf;
  blk_tag_t             bm_wtag [COLS];
  vec_t                 bm_pd   [COLS];

  assign ac_valid[0] = la_valid;
  assign ac_data[0]  = la_data;
  assign ac_tag[0]   = la_tag;
  assign la_ready    = ac_ready[0];
  assign ac_ready[ROWS] = 1'b0;   // nothing is forwarded past the last MMod
  assign bc_valid[0] = lb_valid;
  assign bc_data[0]  = lb_data;
  assign bc_tag[0]   = lb_tag;
  assign lb_ready    = bc_ready[0];
  assign bc_ready[COLS] = 1'b0;

  for (genvar r = 0; r < ROWS; r++) begin : g_amod
    sa_mmod #(.INDEX(r), .LINES(ROWS), .VEC(VEC), .INTERLEAVE(INTERLEAVE), .SCALE(SCALE), .IS_A(1'b1)) u_mmod (
      .clk, .rst_n,
      .in_valid(ac_valid[r]), .in_ready(ac_ready[r]), .in_data(ac_data[r]), .in_tag(ac_tag[r]),
      .fwd_valid(ac_valid[r+1]), .fwd_ready(ac_ready[r+1]), .fwd_data(ac_data[r+1]), .fwd_tag(ac_tag[r+1]),
      .full(am_full[r]), .wtag(am_wtag[r]), .rd_active(am_rd[r]), .busy(am_busy[r]), .swap,
      .pe_valid(am_pv[r]), .pe_data(am_pd[r]), .pe_b(am_pb[r]), .pe_flush(am_pf[r]));
  end

  for (genvar c = 0; c < COLS; c++) begin : g_bmod
    sa_mmod #(.INDEX(c), .LINES(COLS), .VEC(VEC), .INTERLEAVE(INTERLEAVE), .SCALE(SCALE), .IS_A(1'b0)) u_mmod (
      .clk, .rst_n,
      .in_valid(bc_valid[c]), .in_ready(bc_ready[c]), .in_data(bc_data[c]), .in_tag(bc_tag[c]),
      .fwd_valid(bc_valid[c+1]), .fwd_ready(bc_ready[c+1]), .fwd_data(bc_data[c+1]), .fwd_tag(bc_tag[c+1]),
      .full(bm_full[c]), .wtag(bm_wtag[c]), .rd_active(bm_rd[c]), .busy(bm_busy[c]), .swap,
      .pe_valid(bm_pv[c]), .pe_data(bm_pd[c]), .pe_b(bm_pb[c]), .pe_flush(bm_pf[c]));
  end

  // ------------------------------------------------------------------ PE grid
  // Horizontal links h*[r][c] enter PE(r,c) from the left; vertical links v*[r][c] from above.
  logic [ROWS-1:0][COLS:0] h_valid, h_b, h_flush;
  vec_t                    h_data [ROWS][COLS+1];
  logic [ROWS:0][COLS-1:0] v_valid;
  vec_t                    v_data [ROWS+1][COLS];
  // Drain links: each PE's upward drain output is declared inside its generate scope
  // (g_pe_row[r].g_pe_col[c].dr_*), and the bottom row's drain input is tied off.
  logic [ROWS-1:0][COLS-1:0] pe_idle;
  logic [COLS-1:0]           top_dr_valid, top_dr_ready;
  logic [31:0]               top_dr_data [COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row_in
    assign h_valid[r][0] = am_pv[r];
    assign h_b[r][0]     = am_pb[r];
    assign h_flush[r][0] = am_pf[r];
    assign h_data[r][0]  = am_pd[r];
  end
  for (genvar c = 0; c < COLS; c++) begin : g_col_in
    assign v_valid[0][c]    = bm_pv[c];
    assign v_data[0][c]     = bm_pd[c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_pe_row
    for (genvar c = 0; c < COLS; c++) begin : g_pe_col
      logic        dr_valid, dr_ready;     // this PE's drain output, towards row r-1
      logic [31:0] dr_data;
      logic        below_valid, below_ready;
      logic [31:0] below_data;
      if (r == ROWS - 1) begin : g_bottom
        assign below_valid = 1'b0;
        assign below_data  = '0;
      end else begin : g_inner
        assign below_valid = g_pe_row[r+1].g_pe_col[c].dr_valid;
        assign below_data  = g_pe_row[r+1].g_pe_col[c].dr_data;
        assign g_pe_row[r+1].g_pe_col[c].dr_ready = below_ready;
      end
      if (r == 0) begin : g_top
        assign top_dr_valid[c] = dr_valid;
        assign top_dr_data[c]  = dr_data;
        assign dr_ready        = top_dr_ready[c];
      end
      sa_pe #(.VEC(VEC), .INTERLEAVE(INTERLEAVE), .ROW(r), .ROWS(ROWS)) u_pe (
        .clk, .rst_n, .k_vecs,
        .a_valid(h_valid[r][c]), .a_b(h_b[r][c]), .a_flush(h_flush[r][c]), .a_data(h_data[r][c]),
        .b_valid(v_valid[r][c]), .b_data(v_data[r][c]),
        .a_out_valid(h_valid[r][c+1]), .a_out_b(h_b[r][c+1]), .a_out_flush(h_flush[r][c+1]),
        .a_out_data(h_data[r][c+1]),
        .b_out_valid(v_valid[r+1][c]), .b_out_data(v_data[r+1][c]),
        .dr_in_valid(below_valid), .dr_in_ready(below_ready), .dr_in_data(below_data),
        .dr_out_valid(dr_valid), .dr_out_ready(dr_ready), .dr_out_data(dr_data),
        .idle(pe_idle[r][c]));
    end
  end

  // ------------------------------------------------------------------ OMod chain
  // o*[c] is the output of OMod c; o*[COLS] the (empty) chain input of the last OMod.
  logic [COLS:0] o_valid, o_ready;
  logic [31:0]   o_data [COLS+1];
  assign o_valid[COLS] = 1'b0;
  assign o_data[COLS]  = '0;

  for (genvar c = 0; c < COLS; c++) begin : g_omod
    sa_omod #(.COL(c), .COLS(COLS), .ROWS(ROWS), .INTERLEAVE(INTERLEAVE)) u_omod (
      .clk, .rst_n,
      .col_valid(top_dr_valid[c]), .col_ready(top_dr_ready[c]), .col_data(top_dr_data[c]),
      .chain_valid(o_valid[c+1]), .chain_ready(o_ready[c+1]), .chain_data(o_data[c+1]),
      .out_valid(o_valid[c]), .out_ready(o_ready[c]), .out_data(o_data[c]));
  end

  // ------------------------------------------------------------------ global drain
  logic gd_done;
  sa_global_drain #(.ROWS(ROWS), .COLS(COLS), .INTERLEAVE(INTERLEAVE)) u_global_drain (
    .clk, .rst_n, .start, .m_blocks, .n_blocks, .bias_en, .act_en, .bias_base, .out_base(c_base),
    .in_valid(o_valid[0]), .in_ready(o_ready[0]), .in_data(o_data[0]),
    .bias_req_valid(bias_rd_req_valid), .bias_req_ready(bias_rd_req_ready), .bias_req_addr(bias_rd_req_addr),
    .bias_rsp_valid(bias_rd_rsp_valid), .bias_rsp_data(bias_rd_rsp_data),
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .done(gd_done));

  // ------------------------------------------------------------------ pass sequencer
  logic all_full, any_reading, grid_idle, want_pass, flushed;
  blk_tag_t next_tag;

  assign all_full    = (&am_full) && (&bm_full);
  assign any_reading = (|am_rd) || (|bm_rd);
  assign grid_idle   = (&pe_idle) && !(|am_busy) && !(|bm_busy);
  assign next_tag    = am_wtag[0];
  assign want_pass   = running && all_full && !any_reading;
  assign swap        = want_pass && (!next_tag.last || grid_idle);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running      <= 1'b0;
      done         <= 1'b0;
      flushed      <= 1'b0;
      pass_count   <= '0;
      stall_cycles <= '0;
    end else if (start && !running) begin
      running      <= 1'b1;
      done         <= 1'b0;
      flushed      <= 1'b0;
      pass_count   <= '0;
      stall_cycles <= '0;
    end else if (running) begin
      if (swap) pass_count <= pass_count + 32'd1;
      if (want_pass && !swap) stall_cycles <= stall_cycles + 32'd1;
      if (swap && next_tag.flush) flushed <= 1'b1;
      if (flushed && gd_done && la_done && lb_done && grid_idle && !any_reading) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
    end
  end

  // Both MMod chains always hold blocks of the same pass.
  assert property (@(posedge clk) disable iff (!rst_n) swap |-> (bm_wtag[0] == next_tag))
    else $error("ecad_systolic_array: A and B blocks out of step");
endmodule
