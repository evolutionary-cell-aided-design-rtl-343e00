// Self-checking test of sa_pe: a PE at row 0 of a two-row column computes two output blocks of
// k_vecs = 3 vector steps each, then a flush block, from random FP32 vectors. A reference model in
// the testbench keeps its own I*I accumulators and reduces each dot product with the same pairwise
// order, using the independent reference arithmetic of fp_ref_pkg. The drain port must deliver
// this PE's results, then the words offered on the drain input from "below", block after block,
// under random back-pressure. Also checked: one-cycle forwarding of both operand streams, and the
// latency from the last input vector to the first result in the drain cache (3 clock edges).
module tb_sa_pe;
  import fp_ref_pkg::*;
  localparam int VEC = 4, IL = 2, NACC = IL * IL, KV = 3, NBLK = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic a_valid, a_b, a_flush, b_valid;
  logic [VEC-1:0][31:0] a_data, b_data, a_out_data, b_out_data;
  logic a_out_valid, a_out_b, a_out_flush, b_out_valid;
  logic dr_in_valid, dr_in_ready, dr_out_valid, dr_out_ready, idle;
  logic [31:0] dr_in_data, dr_out_data;

  sa_pe #(.VEC(VEC), .INTERLEAVE(IL), .ROW(0), .ROWS(2)) dut (
    .clk, .rst_n, .k_vecs(16'(KV)), .a_valid, .a_b, .a_flush, .a_data, .b_valid, .b_data,
    .a_out_valid, .a_out_b, .a_out_flush, .a_out_data, .b_out_valid, .b_out_data,
    .dr_in_valid, .dr_in_ready, .dr_in_data, .dr_out_valid, .dr_out_ready, .dr_out_data, .idle);

  logic [31:0] expq[$];
  logic [31:0] acc [NACC];

  function automatic logic [31:0] dot(logic [VEC-1:0][31:0] x, logic [VEC-1:0][31:0] y);
    logic [31:0] lvl [VEC];
    int n;
    for (int v = 0; v < VEC; v++) lvl[v] = ref_mul(x[v], y[v]);
    n = VEC;
    while (n > 1) begin
      for (int i = 0; i < n / 2; i++) lvl[i] = ref_add(lvl[2*i], lvl[2*i+1]);
      n = n / 2;
    end
    return lvl[0];
  endfunction

  // Drain input from "below": words 0xB0000000 + n, NACC per block.
  int below_n = 0;
  always @(negedge clk) begin
    dr_in_valid  <= (below_n < NBLK * NACC) && ($urandom_range(99) < 60);
    dr_out_ready <= ($urandom_range(99) < 60);
  end
  assign dr_in_data = 32'hB000_0000 + 32'(below_n);
  always @(posedge clk) if (dr_in_valid && dr_in_ready) below_n <= below_n + 1;

  int got_n = 0;
  always @(posedge clk) if (rst_n && dr_out_valid && dr_out_ready) begin
    checks++;
    if (expq.size() == 0 || dr_out_data !== expq[0]) begin
      failures++;
      if (failures < 10) $display("drain word %0d: got %h expected %h", got_n, dr_out_data, expq.size() ? expq[0] : 0);
    end
    if (expq.size()) void'(expq.pop_front());
    got_n++;
  end

  // Forwarding check.
  logic [VEC-1:0][31:0] prev_a, prev_b;
  logic prev_v, prev_bflag;
  always @(posedge clk) begin
    if (rst_n && prev_v) begin
      checks++;
      if (!a_out_valid || !b_out_valid || a_out_data != prev_a || b_out_data != prev_b || a_out_b != prev_bflag) begin
        failures++;
        $display("forwarding mismatch");
      end
    end
    #1;
    prev_v = a_valid; prev_a = a_data; prev_b = b_data; prev_bflag = a_b;
  end

  initial begin
    a_valid = 0; b_valid = 0; a_b = 0; a_flush = 0; a_data = '0; b_data = '0;
    prev_v = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int blk = 0; blk < NBLK; blk++) begin
      for (int s = 0; s < KV; s++)
        for (int p = 0; p < NACC; p++) begin
          @(negedge clk);
          a_valid = 1; b_valid = 1; a_b = (s == 0); a_flush = 0;
          for (int v = 0; v < VEC; v++) begin a_data[v] = rand_fp(6); b_data[v] = rand_fp(6); end
          acc[p] = ref_add((s == 0) ? 32'd0 : acc[p], dot(a_data, b_data));
          if (s == KV - 1) expq.push_back(acc[p]);
          if (blk == 0 && s == KV - 1 && p == 0)
            fork begin
              int e;
              e = 0;
              do begin @(posedge clk); e++; #1; end while (!dut.dq_valid && e < 10);
              checks++;
              if (e != 3) begin failures++; $display("drain latency %0d edges, expected 3", e); end
            end join_none
        end
      for (int n = 0; n < NACC; n++) expq.push_back(32'hB000_0000 + 32'(blk * NACC + n));
      // idle gap with bubbles between blocks
      @(negedge clk);
      a_valid = 0; b_valid = 0;
      repeat (3) @(negedge clk);
    end
    // flush: b = 1 and flush = 1, zero data; must clear and produce nothing
    for (int p = 0; p < NACC; p++) begin
      @(negedge clk);
      a_valid = 1; b_valid = 1; a_b = 1; a_flush = 1; a_data = '0; b_data = '0;
    end
    @(negedge clk);
    a_valid = 0; b_valid = 0; a_b = 0; a_flush = 0;
    repeat (200) @(negedge clk);
    checks++;
    if (expq.size() != 0 || !idle) begin
      failures++;
      $display("%0d drain words missing, idle=%0d", expq.size(), idle);
    end
    for (int k = 0; k < NACC; k++) begin
      checks++;
      if (dut.sr[k] != 32'd0) begin failures++; $display("accumulator %0d not cleared", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
