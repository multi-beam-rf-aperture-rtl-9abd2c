// afft_stage1_b8: first factor of the approximate 8-point DFT, B_8.
//
// B_8 = [[1,1],[1,-1]] (x) I_4 is a column of four radix-2 butterflies that
// pair element k with element k+4:
//     y[k]   = x[k] + x[k+4]
//     y[k+4] = x[k] - x[k+4]        k = 0..3
// Real and imaginary parts are processed independently, so the stage holds
// 16 real adders (8 complex additions). The factor itself is the paper's;
// the output register and the one-bit word growth are this design's choice.
//
// Interface: a vector of eight complex IN_W-bit samples with a valid bit in,
// eight complex (IN_W+1)-bit results out. Timing: one register level, the
// result and out_valid appear one clock after the input; a new vector may
// enter every clock. Only the valid bit is reset.
module afft_stage1_b8 #(
  parameter int unsigned IN_W = afft_pkg::IN_W
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

  always_comb begin
    for (int k = 0; k < 4; k++) begin
      s_re[k]   = OUT_W'(x_re[k]) + OUT_W'(x_re[k+4]);
      s_im[k]   = OUT_W'(x_im[k]) + OUT_W'(x_im[k+4]);
      s_re[k+4] = OUT_W'(x_re[k]) - OUT_W'(x_re[k+4]);
      s_im[k+4] = OUT_W'(x_im[k]) - OUT_W'(x_im[k+4]);
    end
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
