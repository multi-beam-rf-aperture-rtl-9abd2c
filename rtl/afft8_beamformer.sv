// afft8_beamformer: eight simultaneous receive beams from an 8-element
// uniform linear antenna array, by a spatial 8-point approximate FFT that
// uses no multipliers.
//
// Each clock, one complex sample from every element (I and Q from the
// element's ADC pair) enters as a vector v_0..v_7. The top applies the
// approximate DFT matrix F8^ through its fast factorization
//     F8^ = P diag(I_2,A_1,A_3) D_2 diag(B_2,I_2,A_4) D_1 diag(B_4,A_2) B_8
// built as four pipelined adder levels:
//     stage 1  B_8                      8 complex additions
//     stage 2  diag(B_4,A_2), D_1       6 complex additions, 2 halvings
//     stage 3  diag(B_2,I_2,A_4)        6 complex additions
//     stage 4  D_2, diag(I_2,A_1,A_3), P  6 complex additions, j folded in
// 26 complex (52 real) additions and 4 real one-bit shifts in all, and no
// multiplier. Beam k is V_k, the spatial-frequency bin k, in natural order.
//
// The factorization, the adder and shift counts and the 16-bit input are the
// paper's. This design's choices: a register after every adder level
// (LATENCY = 4 clocks), one vector per clock with a valid bit and no
// back-pressure, one bit of growth per adder level in stages 1 to 3 (19-bit
// beams), truncating (floor) halvings, and a reset of the valid bits only.
//
// Interface: v_re/v_im [8] of IN_W bits with in_valid; beam_re/beam_im [8] of
// IN_W+3 bits with out_valid, LATENCY clocks after the matching in_valid.
module afft8_beamformer #(
  parameter int unsigned IN_W = afft_pkg::IN_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic signed [IN_W-1:0]        v_re    [afft_pkg::N],
  input  logic signed [IN_W-1:0]        v_im    [afft_pkg::N],
  output logic                          out_valid,
  output logic signed [IN_W+afft_pkg::GROWTH-1:0] beam_re [afft_pkg::N],
  output logic signed [IN_W+afft_pkg::GROWTH-1:0] beam_im [afft_pkg::N]
);
  logic                   s1_valid, s2_valid, s3_valid;
  logic signed [IN_W:0]   s1_re [8];
  logic signed [IN_W:0]   s1_im [8];
  logic signed [IN_W+1:0] s2_re [8];
  logic signed [IN_W+1:0] s2_im [8];
  logic signed [IN_W+2:0] s3_re [8];
  logic signed [IN_W+2:0] s3_im [8];

  afft_stage1_b8 #(.IN_W(IN_W)) u_stage1 (
    .clk, .rst_n, .in_valid,
    .x_re(v_re), .x_im(v_im),
    .out_valid(s1_valid), .y_re(s1_re), .y_im(s1_im)
  );

  afft_stage2_b4a2d1 #(.IN_W(IN_W + 1)) u_stage2 (
    .clk, .rst_n, .in_valid(s1_valid),
    .x_re(s1_re), .x_im(s1_im),
    .out_valid(s2_valid), .y_re(s2_re), .y_im(s2_im)
  );

  afft_stage3_b2a4 #(.IN_W(IN_W + 2)) u_stage3 (
    .clk, .rst_n, .in_valid(s2_valid),
    .x_re(s2_re), .x_im(s2_im),
    .out_valid(s3_valid), .y_re(s3_re), .y_im(s3_im)
  );

  afft_stage4_d2a1a3p #(.IN_W(IN_W + 3)) u_stage4 (
    .clk, .rst_n, .in_valid(s3_valid),
    .x_re(s3_re), .x_im(s3_im),
    .out_valid(out_valid), .y_re(beam_re), .y_im(beam_im)
  );
endmodule
