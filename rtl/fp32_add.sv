// fp32_add: combinational IEEE-754 single-precision adder.
//
// The operands are ordered by magnitude, the smaller significand is shifted
// right by the exponent difference keeping guard, round and sticky bits, the
// significands are added or subtracted, the sum is renormalised with a leading
// zero count and rounded to nearest, ties to even. Subnormal inputs are treated
// as zero and subnormal results flush to zero; exact cancellation gives +0;
// overflow gives infinity; NaN or (+inf)+(-inf) gives the canonical quiet NaN.
// Interface: y = a + b, no clock. Single precision follows the paper; the
// flush-to-zero policy and the combinational form are this design's own choices.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  localparam logic [31:0] QNAN = 32'h7fc0_0000;

  logic        a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;
  logic        swap;
  logic        sx, sz;          // sign of the larger / smaller operand
  logic [7:0]  ex, ez;
  logic [22:0] fx, fz;
  logic [7:0]  d;
  logic [4:0]  dsh;
  logic [49:0] zsh;
  logic [26:0] mx, mz;          // 1.f followed by guard, round, sticky
  logic [27:0] sum;
  logic [26:0] nrm;
  logic [4:0]  lz;
  logic signed [9:0] exp_s;
  logic [22:0] mant;
  logic        guard, sticky, round_up;
  logic [23:0] mant_r;

  always_comb begin
    a_nan  = (a[30:23] == 8'hff) && (a[22:0] != '0);
    b_nan  = (b[30:23] == 8'hff) && (b[22:0] != '0);
    a_inf  = (a[30:23] == 8'hff) && (a[22:0] == '0);
    b_inf  = (b[30:23] == 8'hff) && (b[22:0] == '0);
    a_zero = (a[30:23] == 8'h00);
    b_zero = (b[30:23] == 8'h00);

    swap = (b[30:0] > a[30:0]);
    sx = swap ? b[31] : a[31];
    ex = swap ? b[30:23] : a[30:23];
    fx = swap ? b[22:0] : a[22:0];
    sz = swap ? a[31] : b[31];
    ez = swap ? a[30:23] : b[30:23];
    fz = swap ? a[22:0] : b[22:0];

    d   = ex - ez;
    dsh = (d > 8'd31) ? 5'd31 : d[4:0];
    mx  = {1'b1, fx, 3'b000};
    zsh = {1'b1, fz, 26'd0} >> dsh;
    mz  = {zsh[49:24], |zsh[23:0]};

    if (sx == sz) sum = {1'b0, mx} + {1'b0, mz};
    else          sum = {1'b0, mx} - {1'b0, mz};

    exp_s = $signed({2'b00, ex});
    lz    = '0;
    if (sum[27]) begin
      nrm   = {sum[27:2], sum[1] | sum[0]};
      exp_s = exp_s + 10'sd1;
    end else begin
      for (int k = 26; k >= 0; k--) begin
        if (sum[k]) begin
          lz = 5'(26 - k);
          break;
        end
      end
      nrm   = sum[26:0] << lz;
      exp_s = exp_s - $signed({5'b00000, lz});
    end

    mant     = nrm[25:3];
    guard    = nrm[2];
    sticky   = nrm[1] | nrm[0];
    round_up = guard && (sticky || mant[0]);
    mant_r   = {1'b0, mant} + {23'd0, round_up};
    if (mant_r[23]) exp_s = exp_s + 10'sd1;

    if (a_nan || b_nan || (a_inf && b_inf && (a[31] != b[31])))
      y = QNAN;
    else if (a_inf)
      y = a;
    else if (b_inf)
      y = b;
    else if (a_zero && b_zero)
      y = {a[31] & b[31], 31'd0};
    else if (a_zero)
      y = b;
    else if (b_zero)
      y = a;
    else if (sum == '0)
      y = 32'd0;
    else if (exp_s >= 10'sd255)
      y = {sx, 8'hff, 23'd0};
    else if (exp_s <= 10'sd0)
      y = {sx, 31'd0};
    else
      y = {sx, exp_s[7:0], mant_r[22:0]};
  end
endmodule
