// Single-precision floating-point adder (combinational).
//
// Computes y = a + b on IEEE-754 binary32 words; it is the adder of the PE reduction tree, of the
// PE accumulator and of the bias add in the global drain. The operand of smaller magnitude is
// aligned to the larger one keeping guard, round and sticky bits, the significands are added or
// subtracted, the result is normalised with a leading-zero count and rounded to nearest, ties to
// even. Subnormal inputs are read as zero and results below the smallest normal number flush to
// zero, as in an FPGA DSP block's floating-point mode; an exact zero difference is +0; overflow
// gives infinity; NaN inputs or inf - inf give the quiet NaN 0x7FC00000. FP32 follows the source
// design, the rounding and special-value rules are this design's choice.
// Timing: purely combinational.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sa, sb, sbig, ssml;
  logic [7:0]  ea, eb, ebig, esml;
  logic [22:0] fa, fb;
  logic [23:0] mbig, msml;
  logic [7:0]  d;
  logic [49:0] sh;
  logic [26:0] big_x, sml_x;   // {significand, guard, round, sticky}
  logic [27:0] s;
  logic [4:0]  lz;
  logic        found;
  logic        g, st, rnd;
  logic [24:0] mr;
  logic signed [10:0] e;
  logic a_zero, b_zero, a_inf, b_inf, a_nan, b_nan, swap_ops;

  always_comb begin
    lz = 5'd0; found = 1'b0; g = 1'b0; st = 1'b0; rnd = 1'b0; mr = '0; y = '0;
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (fa == '0);
    b_inf  = (eb == 8'hFF) && (fb == '0);
    a_nan  = (ea == 8'hFF) && (fa != '0);
    b_nan  = (eb == 8'hFF) && (fb != '0);

    swap_ops = {eb, fb} > {ea, fa};
    sbig = swap_ops ? sb : sa;
    ssml = swap_ops ? sa : sb;
    ebig = swap_ops ? eb : ea;
    esml = swap_ops ? ea : eb;
    mbig = {1'b1, swap_ops ? fb : fa};
    msml = {1'b1, swap_ops ? fa : fb};
    d    = ebig - esml;

    // Align the smaller operand; everything shifted below the round bit folds into sticky.
    sh = 50'd0;
    if (d > 8'd49) begin
      sml_x = {26'd0, 1'b1};
    end else begin
      sh    = {msml, 26'd0} >> d;
      sml_x = {sh[49:24], |sh[23:0]};
    end
    big_x = {mbig, 3'b000};

    e = $signed({3'b0, ebig});
    if (sbig == ssml) s = {1'b0, big_x} + {1'b0, sml_x};
    else              s = {1'b0, big_x} - {1'b0, sml_x};

    // Normalise.
    if (s[27]) begin
      s = {1'b0, s[27:2], s[1] | s[0]};
      e = e + 11'sd1;
    end else begin
      for (int k = 26; k >= 0; k--) begin
        if (!found && s[k]) begin
          found = 1'b1;
          lz    = 5'(26 - k);
        end
      end
      s = s << lz;
      e = e - $signed({6'd0, lz});
    end

    g   = s[2];
    st  = s[1] | s[0];
    rnd = g && (st || s[3]);
    mr  = {1'b0, s[26:3]} + {24'd0, rnd};
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 11'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) y = 32'h7FC0_0000;
    else if (a_inf)                                       y = {sa, 8'hFF, 23'd0};
    else if (b_inf)                                       y = {sb, 8'hFF, 23'd0};
    else if (a_zero && b_zero)                            y = {sa & sb, 31'd0};
    else if (a_zero)                                      y = b;
    else if (b_zero)                                      y = a;
    else if (s[26:0] == '0)                               y = 32'h0000_0000;
    else if (e >= 11'sd255)                               y = {sbig, 8'hFF, 23'd0};
    else if (e <= 11'sd0)                                 y = {sbig, 31'd0};
    else                                                  y = {sbig, e[7:0], mr[22:0]};
  end
endmodule
