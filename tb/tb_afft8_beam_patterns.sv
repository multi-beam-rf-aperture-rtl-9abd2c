// tb_afft8_beam_patterns: array-pattern workload for the 8-beam approximate
// FFT beamformer at its default parameters.
//
// A unit plane wave arrives at the 8-element array from angle psi, swept from
// -90 to +90 degrees in 0.01-degree steps. With the temporal frequency at
// pi (half-wavelength spacing at the top of the band) element n sees
// v_n = A * exp(j*pi*n*sin(psi)), quantized to 16 bits; one such vector
// enters per clock. For every beam the testbench records the angle of its
// strongest response and checks it against the look directions
// psi_k = 0, +-14.47, +-30.00, +-48.59 and 90 degrees that an 8-point DFT
// beamformer has (beam 1 at +14.47, beam 7 at -14.47, and so on; beam 4 at
// either end-fire direction, where its response must be within 0.1% of its
// maximum, since its main lobe is flat there). It also forms the normalized patterns of the
// exact DFT in floating point and of the hardware beams, and their
// difference D_i(psi): for the even beams, whose rows equal the exact DFT,
// D_i must vanish up to quantization; for the odd beams its integral, the
// error energy, must match that of the approximate matrix computed in
// double precision to within 3%. Each beam must also be the strongest of
// the eight at its own look direction.
module tb_afft8_beam_patterns;
  localparam int unsigned WI      = afft_pkg::IN_W;
  localparam int unsigned WO      = afft_pkg::IN_W + afft_pkg::GROWTH;
  localparam int          NSTEP   = 18000;       // 0.01-degree steps
  localparam real         PI      = 3.14159265358979323846;
  localparam real         AMP     = 32000.0;

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

  afft8_beamformer dut (.*);

  initial begin
    clk = 1'b0;
    forever #5 clk = ~clk;
  end

  // measured and exact beam magnitudes over the sweep
  real hw_mag [8][NSTEP+1];
  real ex_mag [8][NSTEP+1];
  int  n_out;

  function automatic real psi_deg(input int s);
    return -90.0 + 0.01 * real'(s);
  endfunction

  initial begin
    repeat (NSTEP + 2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // collect outputs in order
  initial begin
    n_out = 0;
    forever begin
      @(negedge clk);
      if (out_valid && n_out <= NSTEP) begin
        for (int i = 0; i < 8; i++)
          hw_mag[i][n_out] = $sqrt(real'(beam_re[i]) * real'(beam_re[i]) + real'(beam_im[i]) * real'(beam_im[i]));
        n_out++;
      end
    end
  end

  initial begin
    real look [8];
    real hw_max [8], ex_max [8];
    int  hw_arg [8];
    look = '{0.0, 14.47, 30.00, 48.59, 90.0, -48.59, -30.00, -14.47};

    rst_n = 1'b0;
    in_valid = 1'b0;
    for (int k = 0; k < 8; k++) begin v_re[k] = '0; v_im[k] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int s = 0; s <= NSTEP; s++) begin
      real sp;
      sp = $sin(psi_deg(s) * PI / 180.0);
      @(negedge clk);
      in_valid = 1'b1;
      for (int n = 0; n < 8; n++) begin
        v_re[n] = WI'($rtoi($floor(AMP * $cos(PI * n * sp) + 0.5)));
        v_im[n] = WI'($rtoi($floor(AMP * $sin(PI * n * sp) + 0.5)));
      end
      // exact DFT response of beam i: sum_n exp(-j2pi i n/8) v_n
      for (int i = 0; i < 8; i++) begin
        real acc_r, acc_i;
        acc_r = 0.0; acc_i = 0.0;
        for (int n = 0; n < 8; n++) begin
          real ph;
          ph = PI * n * sp - 2.0 * PI * i * n / 8.0;
          acc_r += AMP * $cos(ph);
          acc_i += AMP * $sin(ph);
        end
        ex_mag[i][s] = $sqrt(acc_r * acc_r + acc_i * acc_i);
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (6) @(negedge clk);

    checks++;
    if (n_out != NSTEP + 1) begin
      failures++;
      $display("FAIL %0d beam vectors out for %0d in", n_out, NSTEP + 1);
    end

    for (int i = 0; i < 8; i++) begin
      hw_max[i] = 0.0; ex_max[i] = 0.0; hw_arg[i] = 0;
      for (int s = 0; s <= NSTEP; s++) begin
        if (hw_mag[i][s] > hw_max[i]) begin hw_max[i] = hw_mag[i][s]; hw_arg[i] = s; end
        if (ex_mag[i][s] > ex_max[i]) ex_max[i] = ex_mag[i][s];
      end
    end

    for (int i = 0; i < 8; i++) begin
      real pk, dmax, energy, d, dprev;
      bit ok;
      pk = psi_deg(hw_arg[i]);
      // beam 4 looks along the array axis, where its main lobe is flat to
      // within quantization over a few degrees: require full response there
      if (i == 4) ok = (hw_mag[4][0] >= 0.999 * hw_max[4] && hw_mag[4][NSTEP] >= 0.999 * hw_max[4]);
      else        ok = (pk - look[i] <= 0.05 && look[i] - pk <= 0.05);
      checks++;
      if (!ok) begin
        failures++;
        $display("FAIL beam %0d peaks at %0.2f deg, look direction %0.2f", i, pk, look[i]);
      end
      // strongest of all beams at its own peak
      for (int o = 0; o < 8; o++) begin
        if (o == i) continue;
        checks++;
        if (hw_mag[o][hw_arg[i]] >= hw_mag[i][hw_arg[i]]) begin
          failures++;
          $display("FAIL beam %0d not the strongest at %0.2f deg (beam %0d)", i, pk, o);
        end
      end
      // pattern difference and its energy (trapezoidal rule, psi in radians)
      dmax = 0.0; energy = 0.0; dprev = 0.0;
      for (int s = 0; s <= NSTEP; s++) begin
        d = ex_mag[i][s] / ex_max[i] - hw_mag[i][s] / hw_max[i];
        if (d < 0.0) d = -d;
        if (d > dmax) dmax = d;
        if (s > 0) energy += 0.5 * (d * d + dprev * dprev) * (0.01 * PI / 180.0);
        dprev = d;
      end
      $display("beam %0d: peak %0.2f deg, max D = %0.5f, error energy = %0.6f", i, pk, dmax, energy);
      if (i % 2 == 0) begin
        checks++;
        if (dmax > 1.0e-3) begin
          failures++;
          $display("FAIL even beam %0d differs from the exact DFT pattern", i);
        end
      end else begin
        // energy of the approximate matrix itself, integrated in double
        // precision on a 20001-point grid: 4.213e-3 (beams 1, 7) and
        // 2.827e-3 (beams 3, 5)
        real want;
        want = (i == 1 || i == 7) ? 4.213e-3 : 2.827e-3;
        checks++;
        if (energy < 0.97 * want || energy > 1.03 * want) begin
          failures++;
          $display("FAIL beam %0d error energy %0.6f, expected %0.6f", i, energy, want);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
