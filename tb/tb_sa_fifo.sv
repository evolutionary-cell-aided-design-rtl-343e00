// Self-checking test of sa_fifo: random writes and reads with random stalls on both sides; every
// word read is compared with a queue model, and the full/empty flags and count are checked
// against the model's occupancy every cycle.
module tb_sa_fifo;
  localparam int W = 16, D = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  sa_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      checks++;
      if (count != model.size() || in_ready != (model.size() < D) || out_valid != (model.size() > 0)) begin
        failures++;
        $display("flag mismatch count=%0d model=%0d", count, model.size());
      end
      if (out_valid) begin
        checks++;
        if (out_data != model[0]) begin
          failures++;
          $display("data mismatch %h vs %h", out_data, model[0]);
        end
      end
      in_valid  = ($urandom_range(99) < (n < 2000 ? 70 : 30));
      in_data   = W'($urandom);
      out_ready = ($urandom_range(99) < (n < 2000 ? 30 : 70));
      #1;
      begin
        bit wr, rd;
        wr = in_valid && in_ready;
        rd = out_valid && out_ready;
        @(posedge clk);
        if (rd) void'(model.pop_front());
        if (wr) model.push_back(in_data);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
