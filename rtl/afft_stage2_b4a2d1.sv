// afft_stage2_b4a2d1: factors diag(B_4, A_2) and D_1 of the approximate
// 8-point DFT.
//
// Upper half, B_4 = [[1,1],[1,-1]] (x) I_2 on elements 0..3:
//     y0 = x0 + x2   y1 = x1 + x3   y2 = x0 - x2   y3 = x1 - x3
// Lower half, A_2 on elements 4..7 (rows 1000 / 0101 / 0010 / 010-1):
//     y4 = x4        y5 = x5 + x7   y6 = x6        y7 = x5 - x7
// then D_1 = diag(1,1,1,1,1,1/2,1,1/2) halves y5 and y7. The halving is an
// arithmetic right shift by one bit, i.e. floor(v/2); whether the dropped
// bit is rounded is not specified, so truncation is this design's choice.
// These are the only two scalings of the whole transform (4 real shifts).
// Six complex additions, 12 real adders.
//
// Interface: eight complex IN_W-bit values in, eight complex (IN_W+1)-bit
// values out. Timing: one register level, one clock of latency, one vector
// per clock. Only the valid bit is reset.
module afft_stage2_b4a2d1 #(
  parameter int unsigned IN_W = afft_pkg::IN_W + 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic signed [IN_W-1:0]    x_re [afft_pkg::N],
  input  logic signed [IN_W-1:0]    x_im [afft_pkg::N],
  output logic                      out_valid,
  output logic signed [IN_W:0]      y_re [afft_pkg::N],
  output logic signed [IN_W:0]      y_im [afft_pkg::N]
);
  localparam int unsigned OUT_W = IN_W + 1;

  logic signed [OUT_W-1:0] s_re [8];
  logic signed [OUT_W-1:0] s_im [8];
  logic signed [OUT_W-1:0] a5_re, a5_im, a7_re, a7_im;

  always_comb begin
    // B_4 on the upper half
    for (int k = 0; k < 2; k++) begin
      s_re[k]   = OUT_W'(x_re[k]) + OUT_W'(x_re[k+2]);
      s_im[k]   = OUT_W'(x_im[k]) + OUT_W'(x_im[k+2]);
      s_re[k+2] = OUT_W'(x_re[k]) - OUT_W'(x_re[k+2]);
      s_im[k+2] = OUT_W'(x_im[k]) - OUT_W'(x_im[k+2]);
    end
    // A_2 on the lower half
    a5_re = OUT_W'(x_re[5]) + OUT_W'(x_re[7]);
    a5_im = OUT_W'(x_im[5]) + OUT_W'(x_im[7]);
    a7_re = OUT_W'(x_re[5]) - OUT_W'(x_re[7]);
    a7_im = OUT_W'(x_im[5]) - OUT_W'(x_im[7]);
    s_re[4] = OUT_W'(x_re[4]);
    s_im[4] = OUT_W'(x_im[4]);
    s_re[6] = OUT_W'(x_re[6]);
    s_im[6] = OUT_W'(x_im[6]);
    // D_1: halve elements 5 and 7 (arithmetic shift, floor)
    s_re[5] = a5_re >>> 1;
    s_im[5] = a5_im >>> 1;
    s_re[7] = a7_re >>> 1;
    s_im[7] = a7_im >>> 1;
  end

  always_ff @(posedge clk) begin
    y_re <= s_re;
    y_im <= s_im;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
