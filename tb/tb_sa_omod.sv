// Self-checking test of sa_omod: an OMod at column 1 of 3 (rows 2, interleave 2) receives words
// from its column and from the chain with random valid patterns and random output back-pressure.
// For three output blocks the output must be the column's 8 words, then the chain's 8 words, in
// order, with nothing lost or repeated; with constant ready the module must sustain one word per
// cycle.
module tb_sa_omod;
  localparam int COL = 1, COLS = 3, ROWS = 2, IL = 2;
  localparam int NOWN = ROWS * IL * IL, NPASS = (COLS - 1 - COL) * NOWN, NBLK = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic col_valid, col_ready, chain_valid, chain_ready, out_valid, out_ready;
  logic [31:0] col_data, chain_data, out_data;
  int col_n = 0, chain_n = 0, out_n = 0;
  bit fast = 0;

  sa_omod #(.COL(COL), .COLS(COLS), .ROWS(ROWS), .INTERLEAVE(IL)) dut (.*);

  assign col_data   = 32'hC000_0000 + 32'(col_n);
  assign chain_data = 32'hD000_0000 + 32'(chain_n);

  always @(negedge clk) begin
    col_valid   <= (col_n < 2 * NBLK * NOWN) && (fast || $urandom_range(99) < 60);
    chain_valid <= (chain_n < 2 * NBLK * NPASS) && (fast || $urandom_range(99) < 60);
    out_ready   <= fast || ($urandom_range(99) < 60);
  end

  function automatic logic [31:0] expected(int n);
    int blk, off;
    blk = n / (NOWN + NPASS);
    off = n % (NOWN + NPASS);
    return off < NOWN ? 32'hC000_0000 + 32'(blk * NOWN + off) : 32'hD000_0000 + 32'(blk * NPASS + off - NOWN);
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (col_valid && col_ready) col_n <= col_n + 1;
    if (chain_valid && chain_ready) chain_n <= chain_n + 1;
    if (out_valid && out_ready) begin
      checks++;
      if (out_data != expected(out_n)) begin
        failures++;
        if (failures < 10) $display("word %0d: got %h expected %h", out_n, out_data, expected(out_n));
      end
      out_n <= out_n + 1;
    end
  end

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (out_n == NBLK * (NOWN + NPASS));
    // second half: full rate
    @(negedge clk);
    fast = 1;
    repeat (3) @(posedge clk);
    t0 = out_n;
    repeat (10) @(posedge clk);
    checks++;
    if (out_n - t0 != 10) begin failures++; $display("throughput %0d words in 10 cycles", out_n - t0); end
    wait (out_n == 2 * NBLK * (NOWN + NPASS));
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
