// End-to-end test of ecad_systolic_array at reduced size (2x2 grid, VEC 4, interleave 4, scale 2).
// Random FP32 matrices are laid out in the DDR model as blocks, the array runs three jobs and the
// results in memory are compared word for word with a reference GEMM that uses the same summation
// order as the hardware (pairwise tree per vector, then accumulation over vector steps), followed
// by bias and ReLU when enabled:
//   job 1: 2x2 output blocks, 3 common blocks, bias and ReLU on;
//   job 2: 3x1 output blocks, 1 common block, both bypassed (every pass ends an output block, so the
//          sequencer must stall passes until the previous results have drained);
//   job 3: 1x2 output blocks, 2 common blocks, bias on, ReLU off.
// Mechanisms counted and required at least once: back-to-back passes at the full rate of one pass
// per SCALE*I*I+1 cycles (SCALE*I*I vector cycles plus the sequencer's one-cycle turnaround; a
// shorter gap is an error), drain stalls, flush passes, bias on/off, activation on/off, memory
// back-pressure on the loaders and on the write port.
module tb_ecad_systolic_array;
  import fp_ref_pkg::*;
  localparam int R = 2, C = 2, V = 4, IL = 4, S = 2;
  localparam int WORDS = 16384;
  localparam int A0 = 0, B0 = 4096, BI0 = 8192, C0 = 9000;
  localparam int KW = V * S;                 // common-dimension width of a block
  localparam int PASS = S * IL * IL;         // cycles per pass
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, bias_en, act_en, done, running;
  logic [15:0] m_blocks, n_blocks, k_blocks;
  logic [31:0] pass_count, stall_cycles;
  logic [1:0] vrd_req_valid, vrd_req_ready, vrd_rsp_valid;
  logic [1:0][31:0] vrd_req_addr;
  logic [1:0][V-1:0][31:0] vrd_rsp_data;
  logic srd_req_valid, srd_req_ready, srd_rsp_valid, wr_valid, wr_ready;
  logic [31:0] srd_req_addr, srd_rsp_data, wr_addr, wr_data;

  ecad_systolic_array #(.ROWS(R), .COLS(C), .VEC(V), .INTERLEAVE(IL), .SCALE(S)) dut (
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

  ddr_model #(.WORDS(WORDS), .VEC(V), .LAT(4), .STALL_PCT(10)) mem (
    .clk, .vrd_req_valid, .vrd_req_ready, .vrd_req_addr, .vrd_rsp_valid, .vrd_rsp_data,
    .srd_req_valid, .srd_req_ready, .srd_req_addr, .srd_rsp_valid, .srd_rsp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data);

  // ---------------- mechanism counters
  int n_full_rate = 0, n_drain_stall = 0, n_flush = 0, n_bias_on = 0, n_bias_off = 0;
  int n_act_on = 0, n_act_off = 0, n_rd_backpressure = 0, n_wr_backpressure = 0;
  longint last_swap = -1, cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.swap) begin
      if (last_swap >= 0 && cyc - last_swap < PASS + 1) begin
        failures++;
        $display("passes overlap: %0d cycles apart", cyc - last_swap);
      end
      if (last_swap >= 0 && cyc - last_swap == PASS + 1) n_full_rate++;
      if (dut.next_tag.flush) n_flush++;
      last_swap <= cyc;
    end
    if (dut.want_pass && !dut.swap) n_drain_stall++;
    if (vrd_req_valid[0] && !vrd_req_ready[0]) n_rd_backpressure++;
    if (wr_valid && !wr_ready) n_wr_backpressure++;
  end

  // ---------------- reference
  logic [31:0] A [][];   // [M][K]
  logic [31:0] B [][];   // [K][N]
  logic [31:0] bias [];

  task automatic run_job(int mb, int nb, int kb, bit use_bias, bit use_act);
    int M, N, K;
    M = mb * R * IL; N = nb * C * IL; K = kb * KW;
    A = new[M]; foreach (A[i]) A[i] = new[K];
    B = new[K]; foreach (B[i]) B[i] = new[N];
    bias = new[N];
    foreach (A[i, k]) A[i][k] = rand_fp(3);
    foreach (B[k, j]) B[k][j] = rand_fp(3);
    foreach (bias[j]) bias[j] = use_bias ? rand_fp(3) : 32'h7FC0_0000;
    // block layout in memory
    for (int m = 0; m < mb; m++)
      for (int k = 0; k < kb; k++)
        for (int rr = 0; rr < R * IL; rr++)
          for (int kk = 0; kk < KW; kk++)
            mem.mem[A0 + (m * kb + k) * R * IL * KW + rr * KW + kk] = A[m * R * IL + rr][k * KW + kk];
    for (int n = 0; n < nb; n++)
      for (int k = 0; k < kb; k++)
        for (int cc = 0; cc < C * IL; cc++)
          for (int kk = 0; kk < KW; kk++)
            mem.mem[B0 + (n * kb + k) * C * IL * KW + cc * KW + kk] = B[k * KW + kk][n * C * IL + cc];
    foreach (bias[j]) mem.mem[BI0 + j] = bias[j];
    for (int w = 0; w < M * N; w++) mem.mem[C0 + w] = 32'hDEAD_BEEF;
    if (use_bias) n_bias_on++; else n_bias_off++;
    if (use_act) n_act_on++; else n_act_off++;

    @(negedge clk);
    m_blocks = 16'(mb); n_blocks = 16'(nb); k_blocks = 16'(kb);
    bias_en = use_bias; act_en = use_act; start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);

    for (int i = 0; i < M; i++)
      for (int j = 0; j < N; j++) begin
        logic [31:0] acc, lvl [V], e, got;
        int blk, addr;
        acc = 32'd0;
        for (int st = 0; st < K / V; st++) begin
          int n;
          for (int v = 0; v < V; v++) lvl[v] = ref_mul(A[i][st * V + v], B[st * V + v][j]);
          n = V;
          while (n > 1) begin
            for (int q = 0; q < n / 2; q++) lvl[q] = ref_add(lvl[2*q], lvl[2*q+1]);
            n = n / 2;
          end
          acc = ref_add(acc, lvl[0]);
        end
        e = use_bias ? ref_add(acc, bias[j]) : acc;
        if (use_act) e = relu(e);
        blk  = (i / (R * IL)) * nb + j / (C * IL);
        addr = C0 + blk * R * IL * C * IL + (i % (R * IL)) * C * IL + j % (C * IL);
        got  = mem.mem[addr];
        checks++;
        if (got !== e) begin
          failures++;
          if (failures < 10) $display("C[%0d][%0d]: got %h expected %h", i, j, got, e);
        end
      end
    checks++;
    if (pass_count != 32'(mb * nb * kb + 1)) begin
      failures++;
      $display("pass count %0d, expected %0d", pass_count, mb * nb * kb + 1);
    end
  endtask

  task automatic need(string what, int n);
    checks++;
    $display("mechanism %-22s seen %0d times", what, n);
    if (n == 0) begin failures++; $display("mechanism %s never happened", what); end
  endtask

  initial begin
    start = 0; bias_en = 0; act_en = 0; m_blocks = 0; n_blocks = 0; k_blocks = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_job(2, 2, 3, 1'b1, 1'b1);
    run_job(3, 1, 1, 1'b0, 1'b0);
    run_job(1, 2, 2, 1'b1, 1'b0);
    need("full-rate passes", n_full_rate);
    need("drain stall cycles", n_drain_stall);
    need("flush passes", n_flush);
    need("bias on", n_bias_on);
    need("bias off", n_bias_off);
    need("activation on", n_act_on);
    need("activation bypass", n_act_off);
    need("read back-pressure", n_rd_backpressure);
    need("write back-pressure", n_wr_backpressure);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
