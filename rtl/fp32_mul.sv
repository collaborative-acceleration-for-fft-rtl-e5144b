// fp32_mul: combinational IEEE-754 single-precision multiplier, one SIMD lane.
//
// The 24x24-bit significand product is normalised by at most one place and
// rounded to nearest, ties to even. Subnormal inputs and results are flushed
// to signed zero; overflow gives infinity; NaN inputs and inf*0 give the
// quiet NaN 0x7fc00000. Purely combinational: the result is valid in the
// cycle the operands are. The paper asks for single-precision lanes; the
// flush-to-zero and NaN conventions are this design's choice.
module fp32_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [22:0] ma, mb;
  logic [47:0] prod;
  logic [23:0] mant;     // hidden bit + 23 fraction bits before rounding
  logic        guard, sticky;
  logic [24:0] mant_r;
  logic signed [10:0] exp;

  always_comb begin
    {sa, ea, ma} = a;
    {sb, eb, mb} = b;
    sy     = sa ^ sb;
    prod   = {1'b1, ma} * {1'b1, mb};
    exp    = 11'(signed'({3'b000, ea})) + 11'(signed'({3'b000, eb})) - 11'sd127;
    if (prod[47]) begin
      mant   = prod[47:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      exp    = exp + 11'sd1;
    end else begin
      mant   = prod[46:23];
      guard  = prod[22];
      sticky = |prod[21:0];
    end
    mant_r = {1'b0, mant} + 25'(guard && (sticky || mant[0]));
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp    = exp + 11'sd1;
    end

    if ((ea == 8'hff && ma != 0) || (eb == 8'hff && mb != 0) ||
        (ea == 8'hff && eb == 8'h00) || (eb == 8'hff && ea == 8'h00))
      y = 32'h7fc0_0000;
    else if (ea == 8'hff || eb == 8'hff)
      y = {sy, 8'hff, 23'd0};
    else if (ea == 8'h00 || eb == 8'h00)
      y = {sy, 31'd0};
    else if (exp >= 11'sd255)
      y = {sy, 8'hff, 23'd0};
    else if (exp <= 11'sd0)
      y = {sy, 31'd0};
    else
      y = {sy, exp[7:0], mant_r[22:0]};
  end
endmodule
