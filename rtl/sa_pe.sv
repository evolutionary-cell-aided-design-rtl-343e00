// Processing element (PE): one node of the 2D systolic grid.
//
// Every cycle a PE takes one VEC-wide vector of matrix A from its left neighbour (or the row's MMod)
// and one VEC-wide vector of matrix B from its upper neighbour (or the column's MMod), forwards both
// unchanged to its right and lower neighbours one cycle later, and forms their dot product: VEC
// FP32 multipliers followed by a pairwise adder tree of depth log2(VEC). The tree result is added to
// the oldest entry of the accumulator cache, a circular shift register of INTERLEAVE*INTERLEAVE
// words (the source design draws it as INTERLEAVE shift registers SR_0..SR_I-1), so consecutive
// vectors accumulate into the INTERLEAVE x INTERLEAVE output sub-block held by this PE. When the
// A vector carries b = 1 the sum starts from zero instead of the cached value, as in
// `sum = vec1.b ? 0 : accum[0]` of the source design. A counter of partial sums tracks how far the
// current output block is; during its last vector step (k_vecs steps per output block) the demux
// sends each finished sum to the drain cache instead of back into the shift register, which is
// refilled with zero. Vectors flagged flush clear the accumulators and produce no output.
//
// Drain: results leave in columns, towards row 0. The drain cache is a FIFO of I*I words. The drain
// port first sends this PE's own I*I results of a block, then passes on the (ROWS-1-ROW)*I*I results
// of the PEs below it, then repeats. These orders and the runtime `k_vecs` input are this design's
// choices; the multipliers, tree, accumulator shift register, demux and counter follow the source.
//
// Pipeline: register after the multipliers, register after the tree, accumulate and write in the
// third cycle: a vector applied before clock edge t is in the drain cache after edge t+2.
// The caller must keep the drain cache from overflowing: results of a block are only produced when
// the drain cache is empty (the array's sequencer waits for `idle`); an assertion checks it.
module sa_pe
  import sa_pkg::*;
#(
  parameter int unsigned VEC        = 8,
  parameter int unsigned INTERLEAVE = 8,
  parameter int unsigned ROW        = 0,
  parameter int unsigned ROWS       = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [15:0]          k_vecs,
  // A side (vec1 of the source: data plus b flag), from the left
  input  logic                 a_valid,
  input  logic                 a_b,
  input  logic                 a_flush,
  input  logic [VEC-1:0][31:0] a_data,
  // B side (vec2), from above
  input  logic                 b_valid,
  input  logic [VEC-1:0][31:0] b_data,
  // forwarded copies
  output logic                 a_out_valid,
  output logic                 a_out_b,
  output logic                 a_out_flush,
  output logic [VEC-1:0][31:0] a_out_data,
  output logic                 b_out_valid,
  output logic [VEC-1:0][31:0] b_out_data,
  // drain chain: from the PE below, to the PE above (or the OMod)
  input  logic                 dr_in_valid,
  output logic                 dr_in_ready,
  input  logic [31:0]          dr_in_data,
  output logic                 dr_out_valid,
  input  logic                 dr_out_ready,
  output logic [31:0]          dr_out_data,
  output logic                 idle
);
  localparam int unsigned NACC  = INTERLEAVE * INTERLEAVE;
  localparam int unsigned LV    = $clog2(VEC);
  localparam int unsigned NPASS = (ROWS - 1 - ROW) * NACC;

  // ---------------- forwarding registers
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_out_valid <= 1'b0;
      a_out_b     <= 1'b0;
      a_out_flush <= 1'b0;
      b_out_valid <= 1'b0;
    end else begin
      a_out_valid <= a_valid;
      a_out_b     <= a_b;
      a_out_flush <= a_flush;
      b_out_valid <= b_valid;
    end
  end
  always_ff @(posedge clk) begin
    a_out_data <= a_data;
    b_out_data <= b_data;
  end

  // ---------------- stage 1: multipliers
  logic [VEC-1:0][31:0] prod, prod_r;
  logic                 v1, b1, f1;
  for (genvar v = 0; v < VEC; v++) begin : g_mul
    fp32_mul u_mul (.a(a_data[v]), .b(b_data[v]), .y(prod[v]));
  end
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0; b1 <= 1'b0; f1 <= 1'b0;
    end else begin
      v1 <= a_valid; b1 <= a_b; f1 <= a_flush;
    end
  end
  always_ff @(posedge clk) prod_r <= prod;

  // ---------------- stage 2: pairwise reduction tree
  for (genvar l = 0; l <= LV; l++) begin : g_lvl
    logic [31:0] s [VEC >> l];
    if (l == 0) begin : g_leaf
      for (genvar i = 0; i < VEC; i++) begin : g_i
        assign s[i] = prod_r[i];
      end
    end else begin : g_add
      for (genvar i = 0; i < (VEC >> l); i++) begin : g_i
        fp32_add u_add (.a(g_lvl[l-1].s[2*i]), .b(g_lvl[l-1].s[2*i+1]), .y(s[i]));
      end
    end
  end

  logic [31:0] tree_r;
  logic        v2, b2, f2;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v2 <= 1'b0; b2 <= 1'b0; f2 <= 1'b0;
    end else begin
      v2 <= v1; b2 <= b1; f2 <= f1;
    end
  end
  always_ff @(posedge clk) tree_r <= g_lvl[LV].s[0];

  // ---------------- stage 3: accumulate with the shift-register cache, demux
  logic [31:0] sr [NACC];
  logic [31:0] acc_in, acc;
  logic [$clog2(NACC+1)-1:0] pos;
  logic [15:0] spass, cur_spass, k_last;
  logic        route_out;

  assign acc_in    = b2 ? FP32_ZERO : sr[0];
  fp32_add u_acc (.a(acc_in), .b(tree_r), .y(acc));
  assign k_last    = (k_vecs == 16'd0) ? 16'd0 : k_vecs - 16'd1;
  assign cur_spass = b2 ? 16'd0 : spass;
  assign route_out = v2 && !f2 && (cur_spass == k_last);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pos   <= '0;
      spass <= '0;
      for (int k = 0; k < NACC; k++) sr[k] <= FP32_ZERO;
    end else if (v2) begin
      for (int k = 0; k < NACC - 1; k++) sr[k] <= sr[k+1];
      sr[NACC-1] <= (route_out || f2) ? FP32_ZERO : acc;
      if (pos == ($bits(pos))'(NACC - 1)) begin
        pos   <= '0;
        spass <= (f2 || route_out) ? 16'd0 : cur_spass + 16'd1;
      end else begin
        pos   <= pos + 1'b1;
        spass <= cur_spass;
      end
    end
  end

  // ---------------- drain cache and drain chain
  logic        dq_valid, dq_ready, dq_in_ready;
  logic [31:0] dq_data;
  logic [$clog2(NACC+1)-1:0] dq_count;
  logic        own_phase;
  logic [$clog2(NACC + NPASS + 1)-1:0] dr_cnt;

  sa_fifo #(.WIDTH(32), .DEPTH(NACC)) u_drain_cache (
    .clk, .rst_n,
    .in_valid(route_out), .in_ready(dq_in_ready), .in_data(acc),
    .out_valid(dq_valid), .out_ready(dq_ready), .out_data(dq_data), .count(dq_count));

  assign own_phase    = (dr_cnt < ($bits(dr_cnt))'(NACC));
  assign dr_out_valid = own_phase ? dq_valid : dr_in_valid;
  assign dr_out_data  = own_phase ? dq_data  : dr_in_data;
  assign dq_ready     = own_phase && dr_out_ready;
  assign dr_in_ready  = !own_phase && dr_out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) dr_cnt <= '0;
    else if (dr_out_valid && dr_out_ready)
      dr_cnt <= (dr_cnt == ($bits(dr_cnt))'(NACC + NPASS - 1)) ? '0 : dr_cnt + 1'b1;
  end

  assign idle = !a_out_valid && !b_out_valid && !v1 && !v2 && (dq_count == '0);

  // The two operand streams must arrive together, and results must find room in the drain cache.
  assert property (@(posedge clk) disable iff (!rst_n) a_valid == b_valid)
    else $error("sa_pe: A and B vectors out of step");
  assert property (@(posedge clk) disable iff (!rst_n) route_out |-> dq_in_ready)
    else $error("sa_pe: drain cache overflow");
endmodule
