// pair_compute_unit: applies a 2x2 complex gate matrix to one amplitude pair.
//
// For a gate G = [mat0 mat1; mat2 mat3] acting on target qubit t, the pair
// (C_k, C_k+2^t) becomes (mat0*C_k + mat1*C_k+2^t, mat2*C_k + mat3*C_k+2^t).
// Each of the four complex products needs four real products, so 16 fp32
// multipliers work in parallel; the real and imaginary parts of each output are
// then sums of four signed products, formed by two levels of fp32 adders.
// Pipeline: products registered (stage 1), pairwise sums registered (stage 2),
// final sums registered (stage 3). A pair entering with in_valid leaves three
// cycles later with out_valid; one pair can enter every cycle. There is no
// back-pressure: the caller must have room for every pair it sends.
// The update equation follows the paper; the three-stage pipeline, the adder
// tree order and the packing of complex numbers are this design's own choices.
module pair_compute_unit
  import qsim_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  cfloat_t mat [4],
  input  logic    in_valid,
  input  cfloat_t in0,
  input  cfloat_t in1,
  output logic    out_valid,
  output cfloat_t out0,
  output cfloat_t out1
);
  // Products p[r][k], r = output row (0,1), k = term index:
  //   re terms: Mr0.re*x0.re, -Mr0.im*x0.im, Mr1.re*x1.re, -Mr1.im*x1.im
  //   im terms: Mr0.re*x0.im,  Mr0.im*x0.re, Mr1.re*x1.im,  Mr1.im*x1.re
  logic [31:0] mul_a [2][8];
  logic [31:0] mul_b [2][8];
  logic [31:0] prod  [2][8];
  logic [31:0] prod_q[2][8];
  logic [31:0] s1    [2][4];
  logic [31:0] s1_q  [2][4];
  logic [31:0] s2    [2][2];
  logic        v1, v2, v3;

  always_comb begin
    for (int r = 0; r < 2; r++) begin
      mul_a[r][0] = mat[2*r].re;       mul_b[r][0] = in0.re;
      mul_a[r][1] = fneg(mat[2*r].im); mul_b[r][1] = in0.im;
      mul_a[r][2] = mat[2*r+1].re;     mul_b[r][2] = in1.re;
      mul_a[r][3] = fneg(mat[2*r+1].im); mul_b[r][3] = in1.im;
      mul_a[r][4] = mat[2*r].re;       mul_b[r][4] = in0.im;
      mul_a[r][5] = mat[2*r].im;       mul_b[r][5] = in0.re;
      mul_a[r][6] = mat[2*r+1].re;     mul_b[r][6] = in1.im;
      mul_a[r][7] = mat[2*r+1].im;     mul_b[r][7] = in1.re;
    end
  end

  for (genvar r = 0; r < 2; r++) begin : g_row
    for (genvar k = 0; k < 8; k++) begin : g_mul
      fp32_mul u_mul (.a(mul_a[r][k]), .b(mul_b[r][k]), .y(prod[r][k]));
    end
    for (genvar k = 0; k < 4; k++) begin : g_add1
      fp32_add u_add (.a(prod_q[r][2*k]), .b(prod_q[r][2*k+1]), .y(s1[r][k]));
    end
    for (genvar k = 0; k < 2; k++) begin : g_add2
      fp32_add u_add (.a(s1_q[r][2*k]), .b(s1_q[r][2*k+1]), .y(s2[r][k]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      v2 <= 1'b0;
      v3 <= 1'b0;
    end else begin
      v1 <= in_valid;
      v2 <= v1;
      v3 <= v2;
    end
  end

  always_ff @(posedge clk) begin
    prod_q <= prod;
    s1_q   <= s1;
    out0   <= '{im: s2[0][1], re: s2[0][0]};
    out1   <= '{im: s2[1][1], re: s2[1][0]};
  end

  assign out_valid = v3;
endmodule
