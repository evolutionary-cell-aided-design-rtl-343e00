// Self-checking test of sa_mmod: an A-side and a B-side MMod at chain position 1 of 3 receive four
// blocks with random input gaps and random back-pressure from the next module. The testbench acts
// as the sequencer (swap when full and not reading). It checks the forwarded vectors, the vector
// sequence played to the PEs (line order, b flag, flush flag), the swap-to-output latency of
// 2 + INDEX cycles and that each block plays for exactly SCALE*INTERLEAVE^2 cycles.
module tb_sa_mmod;
  import sa_pkg::*;
  localparam int IDX = 1, LINES = 3, VEC = 2, IL = 2, SC = 3;
  localparam int SHARE = IL * SC, STREAM = (LINES - IDX) * SHARE, NBLK = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                 in_valid, fwd_ready;
  logic [VEC-1:0][31:0] in_data;
  blk_tag_t             in_tag;
  logic [1:0]           in_ready, fwd_valid, full, rd_active, busy, swap, pe_valid, pe_b, pe_flush;
  logic [1:0][VEC-1:0][31:0] fwd_data, pe_data;
  blk_tag_t             fwd_tag [2];
  blk_tag_t             wtag [2];

  for (genvar g = 0; g < 2; g++) begin : g_dut
    sa_mmod #(.INDEX(IDX), .LINES(LINES), .VEC(VEC), .INTERLEAVE(IL), .SCALE(SC), .IS_A(g == 0)) dut (
      .clk, .rst_n, .in_valid, .in_ready(in_ready[g]), .in_data, .in_tag,
      .fwd_valid(fwd_valid[g]), .fwd_ready, .fwd_data(fwd_data[g]), .fwd_tag(fwd_tag[g]),
      .full(full[g]), .wtag(wtag[g]), .rd_active(rd_active[g]), .busy(busy[g]), .swap(swap[g]),
      .pe_valid(pe_valid[g]), .pe_data(pe_data[g]), .pe_b(pe_b[g]), .pe_flush(pe_flush[g]));
  end

  function automatic logic [31:0] word(int blk, int idx, int v);
    return 32'(blk * 10000 + idx * 10 + v);
  endfunction
  function automatic blk_tag_t tag_of(int blk);
    blk_tag_t t;
    t.first = (blk % 2 == 0); t.last = (blk % 2 == 1); t.flush = (blk == NBLK - 1);
    return t;
  endfunction

  // Stimulus: both DUTs see the same input; it advances only when both accept.
  initial begin
    in_valid = 0; in_data = '0; in_tag = '0; fwd_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int blk = 0; blk < NBLK; blk++)
      for (int idx = 0; idx < STREAM; idx++) begin
        @(negedge clk);
        while ($urandom_range(99) < 25) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_tag = tag_of(blk);
        for (int v = 0; v < VEC; v++) in_data[v] = word(blk, idx, v);
        #1;
        while (!(in_ready[0] && in_ready[1])) begin
          in_valid = 0; @(negedge clk); in_valid = 1; #1;
        end
        @(posedge clk);
      end
    @(negedge clk);
    in_valid = 0;
  end

  // Forward side: random ready; every forwarded vector is checked.
  int fwd_n = 0;
  always @(negedge clk) fwd_ready <= ($urandom_range(99) < 60);
  always @(posedge clk) if (rst_n && fwd_valid[0] && fwd_ready && in_ready[0] && in_ready[1]) begin
    int blk, idx;
    blk = fwd_n / SHARE; idx = SHARE + fwd_n % SHARE;
    checks++;
    if (fwd_data[0][1] != word(blk, idx, 1) || fwd_data[1][0] != word(blk, idx, 0) || fwd_tag[0] != tag_of(blk)) begin
      failures++;
      $display("forward mismatch n=%0d got %0d", fwd_n, fwd_data[0][1]);
    end
    fwd_n++;
  end

  // Sequencer role and output checking.
  int blocks_played = 0;
  initial begin
    swap = '0;
    wait (rst_n);
    for (int blk = 0; blk < NBLK; blk++) begin
      @(negedge clk);
      while (!(full == 2'b11 && rd_active == 2'b00)) @(negedge clk);
      swap = 2'b11;
      @(negedge clk);
      swap = 2'b00;
      repeat (IDX + 1) begin
        checks++;
        if (pe_valid != 2'b00) begin failures++; $display("early output"); end
        @(negedge clk);
      end
      for (int s = 0; s < SC; s++)
        for (int i = 0; i < IL; i++)
          for (int j = 0; j < IL; j++) begin
            for (int g = 0; g < 2; g++) begin
              int line;
              line = (g == 0) ? i : j;
              checks++;
              if (!pe_valid[g] || pe_data[g][0] != word(blk, line * SC + s, 0) || pe_data[g][1] != word(blk, line * SC + s, 1)) begin
                failures++;
                if (failures < 10) $display("pe mismatch g=%0d blk=%0d s=%0d i=%0d j=%0d got %0d", g, blk, s, i, j, pe_data[g][0]);
              end
            end
            checks++;
            if (pe_b[0] != (tag_of(blk).first && s == 0) || pe_flush[0] != tag_of(blk).flush || pe_b[1] || pe_flush[1]) begin
              failures++;
              $display("flag mismatch blk=%0d s=%0d", blk, s);
            end
            @(negedge clk);
          end
      checks++;
      if (pe_valid != 2'b00) begin failures++; $display("block longer than expected"); end
      blocks_played++;
    end
    repeat (5) @(negedge clk);
    checks++;
    if (fwd_n != NBLK * (STREAM - SHARE) || busy != 2'b00) begin
      failures++;
      $display("forwarded %0d of %0d, busy=%b", fwd_n, NBLK * (STREAM - SHARE), busy);
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
