// afft_stage4_d2a1a3p: factors P x diag(I_2, A_1, A_3) x D_2 of the
// approximate 8-point DFT, the last adder level.
//
// D_2 = diag(1,1,1,j,1,j,j,1) multiplies elements 3, 5 and 6 by j. For a
// complex value a + jb that is -b + ja: a swap of the two parts and a sign
// change. No negator is built; the sign is folded into the adder that
// consumes the rotated value, so each adder below becomes an add or a
// subtract of one real and one imaginary part. With z = D_2 x:
//     u0 = z0            u1 = z1                   (I_2)
//     u2 = z2 - z3       u3 = z2 + z3              (A_1)
//     u4 = z4 - z5       u5 = -z6 + z7             (A_3)
//     u6 = z4 + z5       u7 = z6 + z7
// The permutation P (rows e1,e5,e3,e6,e2,e8,e4,e7) puts the beams in natural
// order: V = (u0, u4, u2, u5, u1, u7, u3, u6).
// Six complex additions, 12 real adders.
//
// Word length: the output has the same width as the input. Every row of the
// approximate DFT matrix has entries whose |Re| + |Im| sum to 8, so a beam
// component of a 16-bit input vector lies within +-2^18 and fits 19 bits. An
// immediate assertion flags any result that would not fit, which can only
// happen when the stage is driven by values stage 3 cannot produce.
//
// Interface: eight complex IN_W-bit values in stage-3 order, eight complex
// IN_W-bit beams V_0..V_7 out. Timing: one register level, one clock of
// latency, one vector per clock. Only the valid bit is reset.
module afft_stage4_d2a1a3p #(
  parameter int unsigned IN_W = afft_pkg::IN_W + 3
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic signed [IN_W-1:0]    x_re [afft_pkg::N],
  input  logic signed [IN_W-1:0]    x_im [afft_pkg::N],
  output logic                      out_valid,
  output logic signed [IN_W-1:0]    y_re [afft_pkg::N],
  output logic signed [IN_W-1:0]    y_im [afft_pkg::N]
);
  // Sums are formed one bit wider, only to let the assertion see overflow.
  localparam int unsigned WW = IN_W + 1;

  logic signed [WW-1:0] e_re [8];
  logic signed [WW-1:0] e_im [8];
  logic signed [WW-1:0] u_re [8];
  logic signed [WW-1:0] u_im [8];
  logic signed [WW-1:0] v_re [afft_pkg::N];
  logic signed [WW-1:0] v_im [afft_pkg::N];

  always_comb begin
    for (int k = 0; k < 8; k++) begin
      e_re[k] = WW'(x_re[k]);
      e_im[k] = WW'(x_im[k]);
    end
    // I_2
    u_re[0] = e_re[0];             u_im[0] = e_im[0];
    u_re[1] = e_re[1];             u_im[1] = e_im[1];
    // A_1 with z3 = j x3
    u_re[2] = e_re[2] + e_im[3];   u_im[2] = e_im[2] - e_re[3];
    u_re[3] = e_re[2] - e_im[3];   u_im[3] = e_im[2] + e_re[3];
    // A_3 with z5 = j x5, z6 = j x6
    u_re[4] = e_re[4] + e_im[5];   u_im[4] = e_im[4] - e_re[5];
    u_re[5] = e_re[7] + e_im[6];   u_im[5] = e_im[7] - e_re[6];
    u_re[6] = e_re[4] - e_im[5];   u_im[6] = e_im[4] + e_re[5];
    u_re[7] = e_re[7] - e_im[6];   u_im[7] = e_im[7] + e_re[6];
    // P: natural beam order
    v_re[0] = u_re[0];  v_im[0] = u_im[0];
    v_re[1] = u_re[4];  v_im[1] = u_im[4];
    v_re[2] = u_re[2];  v_im[2] = u_im[2];
    v_re[3] = u_re[5];  v_im[3] = u_im[5];
    v_re[4] = u_re[1];  v_im[4] = u_im[1];
    v_re[5] = u_re[7];  v_im[5] = u_im[7];
    v_re[6] = u_re[3];  v_im[6] = u_im[3];
    v_re[7] = u_re[6];  v_im[7] = u_im[6];
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < 8; k++) begin
      y_re[k] <= v_re[k][IN_W-1:0];
      y_im[k] <= v_im[k][IN_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  // A beam must fit the output word: the top two bits of each sum agree.
  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int k = 0; k < 8; k++) begin
        assert (v_re[k][WW-1] == v_re[k][WW-2] && v_im[k][WW-1] == v_im[k][WW-2])
          else $error("beam %0d does not fit %0d bits", k, IN_W);
      end
    end
  end
endmodule
