// Single-precision floating-point multiplier (combinational).
//
// Computes y = a * b on IEEE-754 binary32 words, as one multiplier of a PE dot product. The
// 24x24-bit significand product is normalised by at most one place and rounded to nearest, ties
// to even. Like the floating-point mode of an FPGA DSP block, subnormal inputs are read as zero and
// results below the smallest normal number are flushed to zero; overflow gives infinity, and a NaN
// operand or infinity times zero gives the quiet NaN 0x7FC00000. The arithmetic width (FP32)
// follows the source design; the rounding and subnormal handling are this design's choice.
// Timing: purely combinational; the PE registers the result.
module fp32_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [22:0] fa, fb;
  logic [47:0] prod;
  logic [23:0] mant;
  logic        g, st, rnd;
  logic [24:0] mr;
  logic signed [10:0] e;
  logic a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    sy     = sa ^ sb;
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (fa == '0);
    b_inf  = (eb == 8'hFF) && (fb == '0);
    a_nan  = (ea == 8'hFF) && (fa != '0);
    b_nan  = (eb == 8'hFF) && (fb != '0);

    prod = {1'b1, fa} * {1'b1, fb};
    e    = $signed({3'b0, ea}) + $signed({3'b0, eb}) - 11'sd127;
    if (prod[47]) begin
      mant = prod[47:24];
      g    = prod[23];
      st   = |prod[22:0];
      e    = e + 11'sd1;
    end else begin
      mant = prod[46:23];
      g    = prod[22];
      st   = |prod[21:0];
    end
    rnd = g && (st || mant[0]);
    mr  = {1'b0, mant} + {24'd0, rnd};
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 11'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) y = 32'h7FC0_0000;
    else if (a_inf || b_inf)                                    y = {sy, 8'hFF, 23'd0};
    else if (a_zero || b_zero)                                  y = {sy, 31'd0};
    else if (e >= 11'sd255)                                     y = {sy, 8'hFF, 23'd0};
    else if (e <= 11'sd0)                                       y = {sy, 31'd0};
    else                                                        y = {sy, e[7:0], mr[22:0]};
  end
endmodule
