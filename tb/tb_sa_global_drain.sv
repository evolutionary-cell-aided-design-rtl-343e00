// Self-checking test of sa_global_drain (2x2 grid, interleave 2, 2x3 output blocks). Two jobs run
// against the DDR model with random stalls: one with bias and ReLU, one with both bypassed. Input
// words are random FP32 values sent in drain order (column, PE row, sub-block row, sub-block column)
// with random gaps. After `done`, every output word in memory is compared with the re-ordered input
// plus the block's bias, passed through ReLU when enabled, computed with the reference arithmetic.
// The bias-off job starts with garbage in the bias region to show that it is never read.
module tb_sa_global_drain;
  import fp_ref_pkg::*;
  localparam int R = 2, C = 2, IL = 2, MB = 2, NB = 3;
  localparam int NCOL = C * IL, NWORD = R * IL * NCOL, NBLK = MB * NB;
  localparam int BIAS = 100, OUT = 1000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, bias_en, act_en, in_valid, in_ready, done;
  logic [31:0] in_data;
  logic bias_req_valid, bias_req_ready, bias_rsp_valid, wr_valid, wr_ready;
  logic [31:0] bias_req_addr, bias_rsp_data, wr_addr, wr_data;
  logic [1:0] vrd_req_ready, vrd_rsp_valid;
  logic [1:0][7:0][31:0] vrd_rsp_data;

  sa_global_drain #(.ROWS(R), .COLS(C), .INTERLEAVE(IL)) dut (
    .clk, .rst_n, .start, .m_blocks(16'(MB)), .n_blocks(16'(NB)), .bias_en, .act_en,
    .bias_base(32'(BIAS)), .out_base(32'(OUT)), .in_valid, .in_ready, .in_data,
    .bias_req_valid, .bias_req_ready, .bias_req_addr, .bias_rsp_valid, .bias_rsp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .done);

  ddr_model #(.WORDS(4096), .VEC(8), .LAT(4), .STALL_PCT(30)) mem (
    .clk, .vrd_req_valid(2'b00), .vrd_req_ready, .vrd_req_addr('0), .vrd_rsp_valid, .vrd_rsp_data,
    .srd_req_valid(bias_req_valid), .srd_req_ready(bias_req_ready), .srd_req_addr(bias_req_addr),
    .srd_rsp_valid(bias_rsp_valid), .srd_rsp_data(bias_rsp_data),
    .wr_valid, .wr_ready, .wr_addr, .wr_data);

  logic [31:0] val [NBLK][R * IL][NCOL];

  task automatic run(bit use_bias, bit use_act);
    for (int k = 0; k < NB * NCOL; k++) mem.mem[BIAS + k] = use_bias ? rand_fp(4) : 32'h7FC0_0000;
    for (int w = 0; w < NBLK * NWORD; w++) mem.mem[OUT + w] = 32'hDEAD_BEEF;
    for (int b = 0; b < NBLK; b++)
      for (int r = 0; r < R * IL; r++)
        for (int c = 0; c < NCOL; c++) val[b][r][c] = rand_fp(4);
    @(negedge clk);
    bias_en = use_bias; act_en = use_act; start = 1;
    @(negedge clk);
    start = 0;
    for (int b = 0; b < NBLK; b++)
      for (int c = 0; c < C; c++)
        for (int r = 0; r < R; r++)
          for (int i = 0; i < IL; i++)
            for (int j = 0; j < IL; j++) begin
              while ($urandom_range(99) < 30) begin in_valid = 0; @(negedge clk); end
              in_valid = 1; in_data = val[b][r * IL + i][c * IL + j];
              #1;
              while (!in_ready) begin @(negedge clk); #1; end
              @(negedge clk);
            end
    in_valid = 0;
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);
    for (int b = 0; b < NBLK; b++)
      for (int r = 0; r < R * IL; r++)
        for (int c = 0; c < NCOL; c++) begin
          logic [31:0] e;
          e = ref_add(val[b][r][c], use_bias ? mem.mem[BIAS + (b % NB) * NCOL + c] : 32'd0);
          if (use_act) e = relu(e);
          checks++;
          if (mem.mem[OUT + b * NWORD + r * NCOL + c] !== e) begin
            failures++;
            if (failures < 10) $display("blk %0d (%0d,%0d): got %h expected %h", b, r, c, mem.mem[OUT + b * NWORD + r * NCOL + c], e);
          end
        end
  endtask

  initial begin
    start = 0; bias_en = 0; act_en = 0; in_valid = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1, 1);
    run(0, 0);
    checks++;
    if (mem.writes != 2 * NBLK * NWORD) begin failures++; $display("%0d writes", mem.writes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
