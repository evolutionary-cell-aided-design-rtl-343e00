// Self-checking test of sa_loader: runs an A-side job and then a B-side job against the DDR model
// (which stalls requests at random) with random back-pressure on the output stream. Memory word w
// holds the value w, so each received vector shows which address was read. The expected stream is
// built from the block-order loops (m, n, k, line, vector) and the block layout, followed by one
// flush block of zeros; tags and the `done` flag are checked too.
module tb_sa_loader;
  import sa_pkg::*;
  localparam int LINES = 2, VEC = 4, IL = 2, SC = 3;
  localparam int MB = 2, NB = 3, KB = 2;
  localparam int BLOCK_W = LINES * IL * VEC * SC;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, is_a, mem_req_valid, mem_req_ready, mem_rsp_valid, out_valid, out_ready, done;
  logic [31:0] mem_req_addr, base;
  logic [VEC-1:0][31:0] mem_rsp_data, out_data;
  blk_tag_t out_tag;
  logic [1:0] vrd_req_valid, vrd_req_ready, vrd_rsp_valid;
  logic [1:0][31:0] vrd_req_addr;
  logic [1:0][VEC-1:0][31:0] vrd_rsp_data;
  logic srd_rsp_valid, srd_req_ready, wr_ready;
  logic [31:0] srd_rsp_data;
  int checks = 0, failures = 0;

  sa_loader #(.LINES(LINES), .VEC(VEC), .INTERLEAVE(IL), .SCALE(SC), .OUTSTANDING(4)) dut (
    .clk, .rst_n, .start, .is_a, .m_blocks(16'(MB)), .n_blocks(16'(NB)), .k_blocks(16'(KB)), .base,
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_rsp_valid, .mem_rsp_data,
    .out_valid, .out_ready, .out_data, .out_tag, .done);

  ddr_model #(.WORDS(4096), .VEC(VEC), .LAT(5), .STALL_PCT(30)) mem (
    .clk, .vrd_req_valid, .vrd_req_ready, .vrd_req_addr, .vrd_rsp_valid, .vrd_rsp_data,
    .srd_req_valid(1'b0), .srd_req_ready, .srd_req_addr(32'd0), .srd_rsp_valid, .srd_rsp_data,
    .wr_valid(1'b0), .wr_ready, .wr_addr(32'd0), .wr_data(32'd0));

  assign vrd_req_valid = {1'b0, mem_req_valid};
  assign vrd_req_addr  = {32'd0, mem_req_addr};
  assign mem_req_ready = vrd_req_ready[0];
  assign mem_rsp_valid = vrd_rsp_valid[0];
  assign mem_rsp_data  = vrd_rsp_data[0];

  typedef struct { logic [31:0] addr; logic first, last, flush; } exp_t;
  exp_t expq[$];

  task automatic run_job(logic a_side, logic [31:0] b0);
    expq.delete();
    for (int m = 0; m < MB; m++)
      for (int n = 0; n < NB; n++)
        for (int k = 0; k < KB; k++)
          for (int l = 0; l < LINES * IL; l++)
            for (int s = 0; s < SC; s++) begin
              int blk;
              blk = a_side ? (m * KB + k) : (n * KB + k);
              expq.push_back('{b0 + 32'(blk * BLOCK_W + l * VEC * SC + s * VEC), k == 0, k == KB - 1, 1'b0});
            end
    for (int f = 0; f < LINES * IL * SC; f++) expq.push_back('{32'd0, 1'b1, 1'b0, 1'b1});
    @(negedge clk);
    is_a = a_side; base = b0; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (expq.size() > 0) begin
      out_ready = ($urandom_range(99) < 70);
      #1;
      if (out_valid && out_ready) begin
        exp_t e;
        e = expq.pop_front();
        checks++;
        if (out_tag.first != e.first || out_tag.last != e.last || out_tag.flush != e.flush) begin
          failures++;
          $display("tag mismatch at %h", e.addr);
        end
        for (int v = 0; v < VEC; v++) begin
          checks++;
          if (out_data[v] != (e.flush ? 32'd0 : e.addr + 32'(v))) begin
            failures++;
            if (failures < 10) $display("data mismatch %h expected %h", out_data[v], e.addr + 32'(v));
          end
        end
      end
      @(negedge clk);
    end
    out_ready = 1'b0;
    repeat (4) @(negedge clk);
    checks++;
    if (!done || out_valid) begin
      failures++;
      $display("done=%0d out_valid=%0d after job", done, out_valid);
    end
  endtask

  initial begin
    start = 0; is_a = 1; base = 0; out_ready = 0;
    for (int w = 0; w < 4096; w++) mem.mem[w] = 32'(w);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_job(1'b1, 32'd16);
    run_job(1'b0, 32'd1000);
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
