// Full-size workload test: inference of two MNIST multilayer perceptrons for a batch of 32 images
// each, on ecad_systolic_array with every parameter at its default (4x4 grid, VEC 8, interleave 8,
// scale 8): the 784-196-190-150-10 network (four dense layers) and the 784-1018-10 network (one
// hidden layer of 1018 neurons). Hidden layers use ReLU, the output layer none.
//
// The testbench plays the host: it generates random pixel values in [0,1) and random weights and
// biases, pads every dimension up to the block sizes (batch to 32 rows, layer widths to 32 output
// columns, common dimensions to 64), writes the weights transposed and blocked and the inputs
// blocked into the DDR model, runs one job per layer and re-lays the output blocks of one layer
// out as the input blocks of the next. Every output word of every layer is compared bit for bit
// with a reference that sums in the hardware's order (pairwise tree over each 8-wide vector, then
// accumulation), and the padded columns must come out as exact zeros.
//
// Timing: the memory model has a fixed latency and never stalls, so each layer must take at least
// one vector cycle per pass (passes x SCALE*I*I) and at most the back-to-back pass rate plus the
// time to load the first blocks, play the flush pass and drain and write the last output block;
// for a layer with few common blocks per output block the bound is the global drain's rate of
// one output block per 2 x 1024 cycles instead.
// The total cycle count of the first network is printed next to the execution time the source
// design's performance model gives for it at batch sizes 1 to 32 on this configuration (0.38 ms at
// 250 MHz, i.e. 95,000 cycles).
module tb_mlp_workload;
  import fp_ref_pkg::*;
  localparam int BATCH = 32;
  localparam int NNET = 2, MAXL = 4;
  localparam int ROWS = 4, COLS = 4, VEC = 8, IL = 8, SCALE = 8;   // the array's defaults
  localparam int BR = ROWS * IL, BC = COLS * IL, KW = VEC * SCALE;  // block sizes 32, 32, 64
  localparam int PASS = SCALE * IL * IL;
  localparam int WORDS = 1048576;
  localparam int A0 = 0, B0 = 65536, BI0 = 950000, C0 = 960000;
  localparam int NL [NNET] = '{4, 2};
  localparam int LAYER_IN  [NNET][MAXL] = '{'{784, 196, 190, 150}, '{784, 1018, 0, 0}};
  localparam int LAYER_OUT [NNET][MAXL] = '{'{196, 190, 150, 10}, '{1018, 10, 0, 0}};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, bias_en, act_en, done, running;
  logic [15:0] m_blocks, n_blocks, k_blocks;
  logic [31:0] pass_count, stall_cycles;
  logic [1:0] vrd_req_valid, vrd_req_ready, vrd_rsp_valid;
  logic [1:0][31:0] vrd_req_addr;
  logic [1:0][VEC-1:0][31:0] vrd_rsp_data;
  logic srd_req_valid, srd_req_ready, srd_rsp_valid, wr_valid, wr_ready;
  logic [31:0] srd_req_addr, srd_rsp_data, wr_addr, wr_data;

  ecad_systolic_array dut (
    .clk, .rst_n, .start, .m_blocks, .n_blocks, .k_blocks,
    .a_base(32'(A0)), .b_base(32'(B0)), .bias_base(32'(BI0)), .c_base(32'(C0)),
    .bias_en, .act_en, .done, .running,
    .a_rd_req_valid(vrd_req_valid[0]), .a_rd_req_ready(vrd_req_ready[0]), .a_rd_req_addr(vrd_req_addr[0]),
    .a_rd_rsp_valid(vrd_rsp_valid[0]), .a_rd_rsp_data(vrd_rsp_data[0]),
    .b_rd_req_valid(vrd_req_valid[1]), .b_rd_req_ready(vrd_req_ready[1]), .b_rd_req_addr(vrd_req_addr[1]),
    .b_rd_rsp_valid(vrd_rsp_valid[1]), .b_rd_rsp_data(vrd_rsp_data[1]),
    .bias_rd_req_valid(srd_req_valid), .bias_rd_req_ready(srd_req_ready), .bias_rd_req_addr(srd_req_addr),
    .bias_rd_rsp_valid(srd_rsp_valid), .bias_rd_rsp_data(srd_rsp_data),
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .pass_count, .stall_cycles);

  ddr_model #(.WORDS(WORDS), .VEC(VEC), .LAT(6), .STALL_PCT(0)) mem (
    .clk, .vrd_req_valid, .vrd_req_ready, .vrd_req_addr, .vrd_rsp_valid, .vrd_rsp_data,
    .srd_req_valid, .srd_req_ready, .srd_req_addr, .srd_rsp_valid, .srd_rsp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data);

  function automatic int pad(int x, int b);
    return (x + b - 1) / b * b;
  endfunction

  // Activations of the current layer input (host copy, padded) and the reference output.
  logic [31:0] X [][];   // [BATCH][Kpad]
  logic [31:0] W [][];   // [Kpad][Npad]
  logic [31:0] bias [];
  logic [31:0] Y [][];   // [BATCH][Npad], reference
  longint cyc = 0, total_cycles = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic run_layer(int net, int l);
    int K, N, KP, NP, kb, nb, mb, passes;
    longint t0, dt, lo, hi;
    K = LAYER_IN[net][l]; N = LAYER_OUT[net][l];
    KP = pad(K, KW); NP = pad(N, BC);
    kb = KP / KW; nb = NP / BC; mb = BATCH / BR;
    W = new[KP]; foreach (W[k]) W[k] = new[NP];
    bias = new[NP];
    foreach (W[k, j]) W[k][j] = (k < K && j < N) ? {1'($urandom), 8'(121 + $urandom_range(4)), 23'($urandom)} : 32'd0;
    foreach (bias[j]) bias[j] = (j < N) ? {1'($urandom), 8'(121 + $urandom_range(4)), 23'($urandom)} : 32'd0;
    // blocked layouts: A block (m,k) row-major BR x KW; B block (n,k) = transposed weights, BC x KW
    for (int m = 0; m < mb; m++)
      for (int k = 0; k < kb; k++)
        for (int r = 0; r < BR; r++)
          for (int kk = 0; kk < KW; kk++)
            mem.mem[A0 + (m * kb + k) * BR * KW + r * KW + kk] = X[m * BR + r][k * KW + kk];
    for (int n = 0; n < nb; n++)
      for (int k = 0; k < kb; k++)
        for (int c = 0; c < BC; c++)
          for (int kk = 0; kk < KW; kk++)
            mem.mem[B0 + (n * kb + k) * BC * KW + c * KW + kk] = W[k * KW + kk][n * BC + c];
    foreach (bias[j]) mem.mem[BI0 + j] = bias[j];

    // reference, in the hardware's summation order
    Y = new[BATCH]; foreach (Y[i]) Y[i] = new[NP];
    for (int i = 0; i < BATCH; i++)
      for (int j = 0; j < NP; j++) begin
        logic [31:0] acc, lvl [VEC];
        acc = 32'd0;
        for (int st = 0; st < KP / VEC; st++) begin
          int n;
          for (int v = 0; v < VEC; v++) lvl[v] = ref_mul(X[i][st * VEC + v], W[st * VEC + v][j]);
          n = VEC;
          while (n > 1) begin
            for (int q = 0; q < n / 2; q++) lvl[q] = ref_add(lvl[2*q], lvl[2*q+1]);
            n = n / 2;
          end
          acc = ref_add(acc, lvl[0]);
        end
        acc = ref_add(acc, bias[j]);
        Y[i][j] = (l < NL[net] - 1) ? relu(acc) : acc;
      end

    @(negedge clk);
    m_blocks = 16'(mb); n_blocks = 16'(nb); k_blocks = 16'(kb);
    bias_en = 1'b1; act_en = (l < NL[net] - 1); start = 1'b1;
    t0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    dt = cyc - t0;
    total_cycles += dt;

    passes = mb * nb * kb;
    lo = longint'(passes) * PASS;
    hi = longint'(passes + 1) * (PASS + 1) + 2 * PASS + 2 * BR * BC;
    // drain-bound layers (few common blocks per output block): the single-buffered global drain
    // takes BR*BC cycles to collect an output block and BR*BC more to write it
    if (longint'(mb * nb) * (2 * BR * BC + PASS + 1) + (kb + 2) * (PASS + 1) > hi)
      hi = longint'(mb * nb) * (2 * BR * BC + PASS + 1) + (kb + 2) * (PASS + 1);
    $display("net %0d layer %0d: %0dx%0d x %0dx%0d, %0d passes, %0d cycles (bounds %0d..%0d), %0d drain-stall cycles",
             net, l, BATCH, K, K, N, passes, dt, lo, hi, stall_cycles);
    checks++;
    if (dt < lo || dt > hi) begin failures++; $display("layer %0d: cycle count out of bounds", l); end
    checks++;
    if (pass_count != 32'(passes + 1)) begin failures++; $display("pass count %0d", pass_count); end

    for (int i = 0; i < BATCH; i++)
      for (int j = 0; j < NP; j++) begin
        logic [31:0] got;
        got = mem.mem[C0 + ((i / BR) * nb + j / BC) * BR * BC + (i % BR) * BC + j % BC];
        checks++;
        if (got !== Y[i][j]) begin
          failures++;
          if (failures < 10) $display("layer %0d out[%0d][%0d]: got %h expected %h", l, i, j, got, Y[i][j]);
        end
      end

    // host re-layout: this layer's output (hardware result) becomes the next layer's input
    if (l < NL[net] - 1) begin
      int KN;
      KN = pad(N, KW);
      X = new[BATCH]; foreach (X[i]) X[i] = new[pad(KN, KW)];
      foreach (X[i, k])
        X[i][k] = (k < NP) ? mem.mem[C0 + ((i / BR) * nb + k / BC) * BR * BC + (i % BR) * BC + k % BC] : 32'd0;
    end
  endtask

  initial begin
    start = 0; bias_en = 0; act_en = 0; m_blocks = 0; n_blocks = 0; k_blocks = 0;
    for (int w = 0; w < WORDS; w++) mem.mem[w] = 32'd0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int net = 0; net < NNET; net++) begin
      X = new[BATCH];
      foreach (X[i]) X[i] = new[pad(LAYER_IN[net][0], KW)];
      // pixels scaled to [0,1): zero or a random value with exponent -8..-1
      foreach (X[i, k]) X[i][k] = (k < LAYER_IN[net][0] && $urandom_range(3) != 0) ? {1'b0, 8'(119 + $urandom_range(7)), 23'($urandom)} : 32'd0;
      total_cycles = 0;
      for (int l = 0; l < NL[net]; l++) run_layer(net, l);
      $display("network %0d: %0d cycles in total, %0.3f ms at 250 MHz", net, total_cycles, real'(total_cycles) / 250.0e3);
      if (net == 0) $display("  (source design's model for this network and configuration: 0.38 ms; measured 0.68 ms)");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
