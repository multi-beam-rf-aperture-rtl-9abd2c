// tb_afft8_beamformer: end-to-end testbench of the 8-beam approximate-FFT
// beamformer at its default parameters (16-bit inputs, 19-bit beams).
//
// The reference is the approximate DFT matrix itself, taken entry by entry
// in its doubled, integer form 2*F8^ (entries 2, +-2j, +-1+-j), and applied to
// each input vector in 64-bit integers. It knows nothing of the factorization
// the hardware uses. Beams 0, 2, 4 and 6 never pass through a halving and
// must be exact; beams 1, 3, 5 and 7 may differ from the exact matrix product
// by the floor of the two halvings, at most one LSB per component.
//
// Traffic: a reset with nothing flowing, a directed set of single-element
// impulses, all 65536 full-scale corner vectors (every I and Q at +max or
// -max), then random vectors with random gaps in in_valid, and a reset in the
// middle of a burst. Every clock's outputs are compared with the vector
// driven exactly LATENCY clocks earlier, so the 4-clock latency and the
// one-vector-per-clock rate are checked with the data. The run counts how
// often each mechanism occurred (gaps, back-to-back vectors, halvings that
// dropped a bit, beams within 8 LSB of full scale, a flush by reset) and
// counts a failure for any that never did.
module tb_afft8_beamformer;
  localparam int unsigned WI      = afft_pkg::IN_W;
  localparam int unsigned WO      = afft_pkg::IN_W + afft_pkg::GROWTH;
  localparam int unsigned LATENCY = 4;
  localparam int unsigned NRAND   = 20000;
  localparam longint      FULL    = longint'(1) <<< (WO - 1);

  logic clk;
  logic rst_n;
  logic in_valid;
  logic signed [WI-1:0] v_re [8];
  logic signed [WI-1:0] v_im [8];
  logic out_valid;
  logic signed [WO-1:0] beam_re [8];
  logic signed [WO-1:0] beam_im [8];

  int checks = 0;
  int failures = 0;
  int n_gap = 0, n_b2b = 0, n_trunc = 0, n_fullscale = 0, n_flush = 0, n_vectors = 0;

  afft8_beamformer dut (.*);

  initial begin
    clk = 1'b0;
    forever #5 clk = ~clk;
  end

  // 2 * F8^, as printed (real and imaginary parts of each entry)
  localparam int CR [8][8] = '{
    '{2, 2, 2, 2, 2, 2, 2, 2},
    '{2, 1, 0,-1,-2,-1, 0, 1},
    '{2, 0,-2, 0, 2, 0,-2, 0},
    '{2,-1, 0, 1,-2, 1, 0,-1},
    '{2,-2, 2,-2, 2,-2, 2,-2},
    '{2,-1, 0, 1,-2, 1, 0,-1},
    '{2, 0,-2, 0, 2, 0,-2, 0},
    '{2, 1, 0,-1,-2,-1, 0, 1}};
  localparam int CI [8][8] = '{
    '{0, 0, 0, 0, 0, 0, 0, 0},
    '{0,-1,-2,-1, 0, 1, 2, 1},
    '{0,-2, 0, 2, 0,-2, 0, 2},
    '{0,-1, 2,-1, 0, 1,-2, 1},
    '{0, 0, 0, 0, 0, 0, 0, 0},
    '{0, 1,-2, 1, 0,-1, 2,-1},
    '{0, 2, 0,-2, 0, 2, 0,-2},
    '{0, 1, 2, 1, 0,-1,-2,-1}};

  typedef struct {
    bit     valid;
    longint re2 [8];   // twice the exact beam value
    longint im2 [8];
  } exp_t;
  exp_t pending [$];
  bit prev_valid = 1'b0;

  function automatic exp_t model(input bit valid, input longint ar [8], input longint ai [8]);
    exp_t e;
    e.valid = valid;
    for (int r = 0; r < 8; r++) begin
      e.re2[r] = 0;
      e.im2[r] = 0;
      for (int c = 0; c < 8; c++) begin
        e.re2[r] += CR[r][c] * ar[c] - CI[r][c] * ai[c];
        e.im2[r] += CR[r][c] * ai[c] + CI[r][c] * ar[c];
      end
    end
    return e;
  endfunction

  function automatic longint absl(input longint a);
    return (a < 0) ? -a : a;
  endfunction

  task automatic compare(input exp_t e);
    checks++;
    if (out_valid !== e.valid) begin
      failures++;
      if (failures < 10) $display("FAIL out_valid=%0b expected %0b", out_valid, e.valid);
    end
    if (e.valid && out_valid) begin
      for (int r = 0; r < 8; r++) begin
        longint dr, di, tol;
        dr = 2 * longint'(beam_re[r]) - e.re2[r];
        di = 2 * longint'(beam_im[r]) - e.im2[r];
        tol = (r % 2 == 0) ? 0 : 2;
        checks++;
        if (absl(dr) > tol || absl(di) > tol) begin
          failures++;
          if (failures < 10)
            $display("FAIL beam %0d = (%0d, %0d), exact (%0d/2, %0d/2)", r, beam_re[r], beam_im[r], e.re2[r], e.im2[r]);
        end
        if (absl(longint'(beam_re[r])) >= FULL - 8 || absl(longint'(beam_im[r])) >= FULL - 8) n_fullscale++;
      end
    end
  endtask

  // Check this clock's outputs, then drive the next vector.
  task automatic step(input bit valid, input longint ar [8], input longint ai [8]);
    longint a5r, a5i, a7r, a7i;
    if (pending.size() == LATENCY) compare(pending.pop_front());
    in_valid = valid;
    for (int k = 0; k < 8; k++) begin
      v_re[k] = WI'(ar[k]);
      v_im[k] = WI'(ai[k]);
    end
    pending.push_back(model(valid, ar, ai));
    if (valid) begin
      n_vectors++;
      if (prev_valid) n_b2b++;
      // the two values D_1 halves, formed from the inputs
      a5r = (ar[1] - ar[5]) + (ar[3] - ar[7]);  a5i = (ai[1] - ai[5]) + (ai[3] - ai[7]);
      a7r = (ar[1] - ar[5]) - (ar[3] - ar[7]);  a7i = (ai[1] - ai[5]) - (ai[3] - ai[7]);
      if (((a5r | a5i | a7r | a7i) & 1) != 0) n_trunc++;
    end else if (prev_valid) begin
      n_gap++;
    end
    prev_valid = valid;
  endtask

  task automatic idle(input int n);
    longint z [8];
    z = '{default: 0};
    for (int t = 0; t < n; t++) begin
      @(negedge clk);
      step(1'b0, z, z);
    end
  endtask

  initial begin
    repeat (65536 + NRAND + 2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ar [8];
    longint ai [8];
    longint hi, lo;
    hi = (longint'(1) <<< (WI - 1)) - 1;
    lo = -(longint'(1) <<< (WI - 1));

    rst_n = 1'b0;
    in_valid = 1'b1;
    for (int k = 0; k < 8; k++) begin v_re[k] = '0; v_im[k] = '0; end
    repeat (3) @(negedge clk);
    checks++;
    if (out_valid !== 1'b0) begin failures++; $display("FAIL out_valid high in reset"); end
    rst_n = 1'b1;

    // impulses: element e at 1000 + 3j gives column e of the matrix
    for (int e = 0; e < 8; e++) begin
      ar = '{default: 0};
      ai = '{default: 0};
      ar[e] = 1000;
      ai[e] = 3;
      @(negedge clk);
      step(1'b1, ar, ai);
    end
    idle(2);

    // every full-scale corner vector
    for (int m = 0; m < 65536; m++) begin
      for (int k = 0; k < 8; k++) begin
        ar[k] = m[k]     ? hi : lo;
        ai[k] = m[k + 8] ? hi : lo;
      end
      @(negedge clk);
      step(1'b1, ar, ai);
    end

    // random vectors with random gaps
    for (int t = 0; t < NRAND; t++) begin
      for (int k = 0; k < 8; k++) begin
        ar[k] = longint'($urandom_range(0, 65535)) + lo;
        ai[k] = longint'($urandom_range(0, 65535)) + lo;
      end
      @(negedge clk);
      step(($urandom_range(0, 9) < 7), ar, ai);
    end

    // reset in the middle of a burst: the vectors in flight are dropped
    for (int t = 0; t < 3; t++) begin
      @(negedge clk);
      step(1'b1, ar, ai);
    end
    rst_n = 1'b0;
    pending.delete();
    @(negedge clk);
    checks++;
    if (out_valid !== 1'b0) begin failures++; $display("FAIL reset did not flush the pipeline"); end
    else n_flush++;
    rst_n = 1'b1;
    in_valid = 1'b0;
    prev_valid = 1'b0;
    for (int t = 0; t < LATENCY + 1; t++) begin
      @(negedge clk);
      checks++;
      if (out_valid !== 1'b0) begin failures++; $display("FAIL stale vector after reset"); end
    end
    for (int t = 0; t < 50; t++) begin
      for (int k = 0; k < 8; k++) begin
        ar[k] = longint'($urandom_range(0, 65535)) + lo;
        ai[k] = longint'($urandom_range(0, 65535)) + lo;
      end
      @(negedge clk);
      step(1'b1, ar, ai);
    end
    idle(LATENCY + 1);

    $display("mechanisms: vectors=%0d back_to_back=%0d gaps=%0d truncating_halvings=%0d full_scale_beams=%0d reset_flushes=%0d",
             n_vectors, n_b2b, n_gap, n_trunc, n_fullscale, n_flush);
    if (n_b2b == 0)       begin failures++; $display("FAIL no back-to-back vectors"); end
    if (n_gap == 0)       begin failures++; $display("FAIL no gap in in_valid"); end
    if (n_trunc == 0)     begin failures++; $display("FAIL no halving dropped a bit"); end
    if (n_fullscale == 0) begin failures++; $display("FAIL no full-scale beam"); end
    if (n_flush == 0)     begin failures++; $display("FAIL no reset flush"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
