// tb_afft_stage3_b2a4: self-checking testbench of afft_stage3_b2a4, the factor
// diag(B_2, I_2, A_4) of the approximate 8-point DFT.
//
// The expected output is the factor matrix, written out entry by entry from
// its definition, applied to the input vector with plain integer arithmetic
// (complex entries as separate real and imaginary coefficient tables); rows
// that the factor halves are divided by two with floor. Vectors are random,
// with random gaps in in_valid, and every clock's output is compared with
// the input of exactly one clock before, so the one-cycle latency and the
// valid bit are checked along with the data. A short directed part drives
// the full-scale corners. A watchdog ends the run if it stalls.
module tb_afft_stage3_b2a4;
  localparam int unsigned WI = afft_pkg::IN_W + 2;
  localparam int unsigned WO = afft_pkg::IN_W + 3;
  localparam int unsigned NVEC = 4000;
  localparam int unsigned LAT = 1;

  logic clk;
  logic rst_n;
  logic in_valid;
  logic signed [WI-1:0] x_re [8];
  logic signed [WI-1:0] x_im [8];
  logic out_valid;
  logic signed [WO-1:0] y_re [8];
  logic signed [WO-1:0] y_im [8];

  int checks = 0;
  int failures = 0;

  afft_stage3_b2a4 dut (.*);

  initial begin
    clk = 1'b0;
    forever #5 clk = ~clk;
  end

  int cr [8][8];
  int ci [8][8];
  bit halve [8];

  typedef struct {
    bit     valid;
    longint re [8];
    longint im [8];
  } exp_t;
  exp_t pending [$];

  function automatic longint rnd_val();
    longint lim;
    longint v;
    lim = (longint'(1) <<< (WI - 1));
    v = longint'($urandom_range(0, 32'(2*lim - 1))) - lim;
    return v;
  endfunction

  function automatic exp_t model(input bit valid, input longint ar [8], input longint ai [8]);
    exp_t e;
    e.valid = valid;
    for (int r = 0; r < 8; r++) begin
      longint sr, si;
      sr = 0; si = 0;
      for (int c = 0; c < 8; c++) begin
        sr += cr[r][c] * ar[c] - ci[r][c] * ai[c];
        si += cr[r][c] * ai[c] + ci[r][c] * ar[c];
      end
      if (halve[r]) begin
        sr = sr >>> 1;
        si = si >>> 1;
      end
      e.re[r] = sr;
      e.im[r] = si;
    end
    return e;
  endfunction

  // Compare the current outputs with the vector driven LAT clocks ago.
  task automatic check_and_drive(input bit valid, input longint ar [8], input longint ai [8]);
    if (pending.size() == LAT) begin
      exp_t e;
      e = pending.pop_front();
      checks++;
      if (out_valid !== e.valid) begin
        failures++;
        $display("FAIL out_valid=%0b expected %0b", out_valid, e.valid);
      end
      if (e.valid) begin
        for (int r = 0; r < 8; r++) begin
          checks++;
          if (longint'(y_re[r]) != e.re[r] || longint'(y_im[r]) != e.im[r]) begin
            failures++;
            if (failures < 10)
              $display("FAIL y[%0d] = (%0d, %0d) expected (%0d, %0d)", r, y_re[r], y_im[r], e.re[r], e.im[r]);
          end
        end
      end
    end
    in_valid = valid;
    for (int k = 0; k < 8; k++) begin
      x_re[k] = WI'(ar[k]);
      x_im[k] = WI'(ai[k]);
    end
    pending.push_back(model(valid, ar, ai));
  endtask

  initial begin
    repeat (NVEC + 2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ar [8];
    longint ai [8];
    // diag(B_2, I_2, A_4), as printed
    cr = '{'{1,1,0,0, 0,0,0,0}, '{1,-1,0,0, 0,0,0,0}, '{0,0,1,0, 0,0,0,0}, '{0,0,0,1, 0,0,0,0},
           '{0,0,0,0, 1,0,0,1}, '{0,0,0,0, 0,1,1,0}, '{0,0,0,0, 0,1,-1,0}, '{0,0,0,0, 1,0,0,-1}};
    ci = '{default: '{default: 0}};
    halve = '{default: 1'b0};
    rst_n = 1'b0;
    in_valid = 1'b1;
    for (int k = 0; k < 8; k++) begin x_re[k] = '0; x_im[k] = '0; end
    repeat (3) @(negedge clk);
    checks++;
    if (out_valid !== 1'b0) begin failures++; $display("FAIL out_valid high in reset"); end
    rst_n = 1'b1;

    // directed: full-scale corners, one element at a time and all at once
    for (int t = 0; t < 40; t++) begin
      for (int k = 0; k < 8; k++) begin
        longint lo, hi;
        hi = (longint'(1) <<< (WI - 1)) - 1;
        lo = -(longint'(1) <<< (WI - 1));
        ar[k] = ((t + k) % 3 == 0) ? hi : (((t ^ k) & 1) != 0 ? lo : hi);
        ai[k] = ((t * 7 + k) % 5 < 2) ? lo : hi;
        if (t < 8 && k != t) begin ar[k] = 0; ai[k] = 0; end
      end
      @(negedge clk);
      check_and_drive(1'b1, ar, ai);
    end
    // random vectors with random bubbles
    for (int t = 0; t < NVEC; t++) begin
      for (int k = 0; k < 8; k++) begin
        ar[k] = rnd_val();
        ai[k] = rnd_val();
      end
      @(negedge clk);
      check_and_drive(($urandom_range(0, 9) < 7), ar, ai);
    end
    for (int t = 0; t < LAT + 1; t++) begin
      @(negedge clk);
      check_and_drive(1'b0, ar, ai);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
