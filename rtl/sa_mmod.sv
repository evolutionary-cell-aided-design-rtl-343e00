// Memory module (MMod): one link of the daisy-chained double buffers that feed the PE grid.
//
// An MMod sits at the head of one PE row (A side, IS_A = 1) or one PE column (B side, IS_A = 0).
// Its input router takes the vector stream from the loader or the previous MMod: of every block,
// the first INTERLEAVE*SCALE vectors (INTERLEAVE lines of SCALE vectors) are this module's share
// and go through the write select into the write memory; the rest of the block, the shares of the
// (LINES-1-INDEX) modules further down the chain, is forwarded to the next MMod (the forward port
// shares the input's data and tag wires; the input router switches only valid and ready). Two memories, Mem0
// and Mem1, alternate: buff_sel picks the one being written, the read mux reads the other one.
// When the write memory holds a complete share, `full` rises; the array's sequencer then pulses
// `swap` for all MMods at once (only when none is still reading, `rd_active`), buff_sel flips and the read side plays the
// new block out to the PEs, one vector per cycle, for SCALE*INTERLEAVE*INTERLEAVE cycles: for each
// vector step s, for each line i, for each line j, the A side sends its line i and the B side its
// line j, so every (i, j) pair of the PE's output sub-block is visited once per vector step.
// The A side marks the vectors of the first step of a block tagged `first` with b = 1, the flag that
// tells the PEs to start new sums, and passes the block's flush tag on.
//
// The input router, write select, Mem0/Mem1, read mux and buff_sel follow the source design. The
// read order, the share size, the sequencer-driven swap and the output skew are this design's
// choices: the PE-facing output is delayed by INDEX registers, so that data entering the grid from
// row INDEX (or column INDEX) meets its partner travelling through the PEs in the same cycle.
// Timing: the first vector appears on pe_* 2 + INDEX clock edges after the edge that samples
// `swap` high (one to start reading, one for the memory read register); `busy` stays high
// while any vector of the block is still in the read pipeline or the skew registers.
module sa_mmod
  import sa_pkg::*;
#(
  parameter int unsigned INDEX      = 0,
  parameter int unsigned LINES      = 4,
  parameter int unsigned VEC        = 8,
  parameter int unsigned INTERLEAVE = 8,
  parameter int unsigned SCALE      = 8,
  parameter bit          IS_A       = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // stream from the loader or the previous MMod
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [VEC-1:0][31:0] in_data,
  input  blk_tag_t             in_tag,
  // stream to the next MMod
  output logic                 fwd_valid,
  input  logic                 fwd_ready,
  output logic [VEC-1:0][31:0] fwd_data,
  output blk_tag_t             fwd_tag,
  // sequencer interface
  output logic                 full,
  output blk_tag_t             wtag,
  output logic                 rd_active,
  output logic                 busy,
  input  logic                 swap,
  // vector into the grid
  output logic                 pe_valid,
  output logic [VEC-1:0][31:0] pe_data,
  output logic                 pe_b,
  output logic                 pe_flush
);
  localparam int unsigned SHARE  = INTERLEAVE * SCALE;          // vectors kept per block
  localparam int unsigned STREAM = (LINES - INDEX) * SHARE;     // vectors arriving per block
  localparam int unsigned AW     = $clog2(SHARE);

  typedef struct packed {
    logic                 valid;
    logic                 b;
    logic                 flush;
    logic [VEC-1:0][31:0] data;
  } pe_word_t;

  logic [VEC*32-1:0] mem0 [SHARE];
  logic [VEC*32-1:0] mem1 [SHARE];
  logic              buff_sel;                 // 0: write Mem0 / read Mem1
  logic [$clog2(STREAM+1)-1:0] in_cnt;
  logic              in_sel;                   // 1: route to own memory
  logic              wr_en, in_fire;
  blk_tag_t          rtag;
  logic              reading;
  logic [$clog2(SCALE+1)-1:0]      rd_s;
  logic [$clog2(INTERLEAVE+1)-1:0] rd_i, rd_j;
  logic [AW-1:0]     rd_addr;
  pe_word_t          skew [INDEX + 1];

  // ---------------- input router and write select
  assign in_sel    = (in_cnt < ($bits(in_cnt))'(SHARE));
  assign in_ready  = in_sel ? !full : fwd_ready;
  assign fwd_valid = in_valid && !in_sel;
  assign fwd_data  = in_data;
  assign fwd_tag   = in_tag;
  assign in_fire   = in_valid && in_ready;
  assign wr_en     = in_fire && in_sel;

  always_ff @(posedge clk) begin
    if (wr_en && !buff_sel) mem0[in_cnt[AW-1:0]] <= in_data;
    if (wr_en &&  buff_sel) mem1[in_cnt[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_cnt <= '0;
      full   <= 1'b0;
      wtag   <= '0;
    end else begin
      if (in_fire) in_cnt <= (in_cnt == ($bits(in_cnt))'(STREAM - 1)) ? '0 : in_cnt + 1'b1;
      if (wr_en && in_cnt == '0) wtag <= in_tag;
      if (swap) full <= 1'b0;
      else if (wr_en && in_cnt == ($bits(in_cnt))'(SHARE - 1)) full <= 1'b1;
    end
  end

  // ---------------- read side: buff_sel swap and read sequence
  assign rd_addr = AW'((IS_A ? 32'(rd_i) : 32'(rd_j)) * SCALE + 32'(rd_s));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      buff_sel <= 1'b0;
      reading  <= 1'b0;
      rtag     <= '0;
      rd_s     <= '0; rd_i <= '0; rd_j <= '0;
    end else if (swap) begin
      buff_sel <= !buff_sel;
      reading  <= 1'b1;
      rtag     <= wtag;
      rd_s     <= '0; rd_i <= '0; rd_j <= '0;
    end else if (reading) begin
      if (rd_j != ($bits(rd_j))'(INTERLEAVE - 1)) rd_j <= rd_j + 1'b1;
      else begin
        rd_j <= '0;
        if (rd_i != ($bits(rd_i))'(INTERLEAVE - 1)) rd_i <= rd_i + 1'b1;
        else begin
          rd_i <= '0;
          if (rd_s != ($bits(rd_s))'(SCALE - 1)) rd_s <= rd_s + 1'b1;
          else reading <= 1'b0;
        end
      end
    end
  end

  // Read mux (reads the memory not selected for writing) and output register.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      skew[0] <= '0;
    end else begin
      skew[0].valid <= reading;
      skew[0].b     <= reading && rtag.first && (rd_s == '0) && IS_A;
      skew[0].flush <= reading && rtag.flush && IS_A;
      skew[0].data  <= buff_sel ? mem0[rd_addr] : mem1[rd_addr];
    end
  end

  // Skew registers: INDEX extra cycles of delay.
  for (genvar d = 1; d <= INDEX; d++) begin : g_skew
    always_ff @(posedge clk) begin
      if (!rst_n) skew[d] <= '0;
      else        skew[d] <= skew[d-1];
    end
  end

  assign rd_active = reading;

  always_comb begin
    busy = reading;
    for (int d = 0; d <= INDEX; d++) busy = busy || skew[d].valid;
  end

  assign pe_valid = skew[INDEX].valid;
  assign pe_data  = skew[INDEX].data;
  assign pe_b     = skew[INDEX].b;
  assign pe_flush = skew[INDEX].flush;

  // The sequencer may swap only a complete write buffer while the read side is idle.
  assert property (@(posedge clk) disable iff (!rst_n) swap |-> full && !reading)
    else $error("sa_mmod: swap while not full or still reading");
endmodule
