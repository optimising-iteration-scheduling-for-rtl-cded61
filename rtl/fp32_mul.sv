// fp32_mul: combinational IEEE-754 single-precision multiplier.
//
// The 24x24-bit significand product is normalised by at most one place and
// rounded to nearest, ties to even. Subnormal inputs are treated as zero and
// results below the normal range flush to signed zero; overflow gives infinity;
// a NaN operand or infinity times zero gives the canonical quiet NaN.
// Interface: y = a * b, no clock, no handshake; the caller registers the result.
// Single-precision amplitudes follow the paper; the flush-to-zero policy and the
// single-cycle combinational form are this design's own choices.
module fp32_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  localparam logic [31:0] QNAN = 32'h7fc0_0000;

  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [22:0] fa, fb;
  logic        a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;
  logic [47:0] prod;
  logic [22:0] mant;
  logic        guard, sticky, round_up;
  logic [23:0] mant_r;
  logic signed [10:0] exp_s;

  always_comb begin
    sa = a[31]; ea = a[30:23]; fa = a[22:0];
    sb = b[31]; eb = b[30:23]; fb = b[22:0];
    sy = sa ^ sb;
    a_nan  = (ea == 8'hff) && (fa != '0);
    b_nan  = (eb == 8'hff) && (fb != '0);
    a_inf  = (ea == 8'hff) && (fa == '0);
    b_inf  = (eb == 8'hff) && (fb == '0);
    a_zero = (ea == 8'h00);
    b_zero = (eb == 8'h00);

    prod  = {1'b1, fa} * {1'b1, fb};
    exp_s = $signed({3'b000, ea}) + $signed({3'b000, eb}) - 11'sd127;
    if (prod[47]) begin
      mant   = prod[46:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      exp_s  = exp_s + 11'sd1;
    end else begin
      mant   = prod[45:23];
      guard  = prod[22];
      sticky = |prod[21:0];
    end
    round_up = guard && (sticky || mant[0]);
    mant_r   = {1'b0, mant} + {23'd0, round_up};
    if (mant_r[23]) exp_s = exp_s + 11'sd1;   // rounding carried into a new binade

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      y = QNAN;
    else if (a_inf || b_inf)
      y = {sy, 8'hff, 23'd0};
    else if (a_zero || b_zero)
      y = {sy, 31'd0};
    else if (exp_s >= 11'sd255)
      y = {sy, 8'hff, 23'd0};
    else if (exp_s <= 11'sd0)
      y = {sy, 31'd0};
    else
      y = {sy, exp_s[7:0], mant_r[22:0]};
  end
endmodule
