// Self-checking test of fp32_mul: random normal operands over a wide exponent range, integer
// values, cancellation cases and special values (zero, infinity, NaN) are applied one per clock
// and the result is compared bit for bit with the double-precision reference in fp_ref_pkg.
module tb_fp32_mul;
  import fp_ref_pkg::*;
  logic [31:0] a, b, y, exp_y;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  fp32_mul dut (.a(a), .b(b), .y(y));

  task automatic check(logic [31:0] ta, logic [31:0] tb_, logic [31:0] want);
    a = ta; b = tb_;
    @(posedge clk);
    checks++;
    if (y !== want) begin
      failures++;
      if (failures < 10) $display("MISMATCH %h mul %h = %h, expected %h", ta, tb_, y, want);
    end
  endtask

  initial begin
    logic [31:0] x, z;
    for (int n = 0; n < 20000; n++) begin
      x = rand_fp(n < 10000 ? 20 : 120);
      z = (n % 3 == 0) ? rand_fp(20) : (n % 3 == 1) ? {~x[31], x[30:23], 23'($urandom)} : rand_fp(120);
      if ("mul" == "add" && n % 7 == 0) z = {~x[31], x[30:0] ^ 31'($urandom_range(3))};
      check(x, z, ref_mul(x, z));
    end
    for (int n = 0; n < 2000; n++) begin
      x = rand_int_fp(); z = rand_int_fp();
      check(x, z, ref_mul(x, z));
    end
    // Special values.
    check(32'h3f800000, 32'h00000000, ("mul" == "mul") ? 32'h00000000 : 32'h3f800000);
    check(32'h7f800000, 32'h3f800000, 32'h7f800000);
    check(32'h7fc00000, 32'h3f800000, 32'h7fc00000);
    check(32'h3f800000, 32'hbf800000, ("mul" == "mul") ? 32'hbf800000 : 32'h00000000);
    check(32'h7f000000, 32'h7f000000, 32'h7f800000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
