// afft_stage3_b2a4: factor diag(B_2, I_2, A_4) of the approximate 8-point DFT.
//
//     y0 = x0 + x1   y1 = x0 - x1               (B_2)
//     y2 = x2        y3 = x3                    (I_2)
//     y4 = x4 + x7   y5 = x5 + x6               (A_4, rows 1001 / 0110 /
//     y6 = x5 - x6   y7 = x4 - x7                      01-10 / 100-1)
// Six complex additions, 12 real adders. The diagonal factor D_2 that
// follows in the product (multiplication of elements 3, 5 and 6 by j) is
// folded into the adders of the next stage, afft_stage4_d2a1a3p, so this
// stage's outputs are still unrotated.
//
// Interface: eight complex IN_W-bit values in, eight complex (IN_W+1)-bit
// values out. Timing: one register level, one clock of latency, one vector
// per clock. Only the valid bit is reset.
module afft_stage3_b2a4 #(
  parameter int unsigned IN_W = afft_pkg::IN_W + 2
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

  // Sign-extended copies of the inputs, so every sum is formed at OUT_W bits.
  logic signed [OUT_W-1:0] e_re [8];
  logic signed [OUT_W-1:0] e_im [8];

  always_comb begin
    for (int k = 0; k < 8; k++) begin
      e_re[k] = OUT_W'(x_re[k]);
      e_im[k] = OUT_W'(x_im[k]);
    end
    // B_2
    s_re[0] = e_re[0] + e_re[1];   s_im[0] = e_im[0] + e_im[1];
    s_re[1] = e_re[0] - e_re[1];   s_im[1] = e_im[0] - e_im[1];
    // I_2
    s_re[2] = e_re[2];             s_im[2] = e_im[2];
    s_re[3] = e_re[3];             s_im[3] = e_im[3];
    // A_4
    s_re[4] = e_re[4] + e_re[7];   s_im[4] = e_im[4] + e_im[7];
    s_re[5] = e_re[5] + e_re[6];   s_im[5] = e_im[5] + e_im[6];
    s_re[6] = e_re[5] - e_re[6];   s_im[6] = e_im[5] - e_im[6];
    s_re[7] = e_re[4] - e_re[7];   s_im[7] = e_im[4] - e_im[7];
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
