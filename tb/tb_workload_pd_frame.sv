// tb_workload_pd_frame -- the accuracy workload: one frame of 256 samples of
// a sine period carrying a partial-discharge (PD) transient, shifted by a
// measurement delay drawn from a normal distribution (mean 1 ms, sigma
// 0.2 ms), is corrected by the interpolation block at full size.
//
// The PD is modelled as a narrow Gaussian dip (depth 0.35, width 2 steps)
// near step 145, where the paper's test signal has its transient. Every
// output is checked against double-precision 15-point Lagrange interpolation
// of the stored samples (the hardware's own arithmetic error); the error
// against the undistorted true waveform is reported at five "corners" (the
// sine peak and the edges of the dip), where interpolation error is largest.
// The frame must be done within the 20 ms budget (2,000,000 clocks).
module tb_workload_pd_frame;
  import dfc_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst = 1;
  logic mu_valid = 0, drdy = 0, start = 0;
  sample_t mu_data;
  logic [PRIM_W-1:0] meas_delay = '0;
  logic out_valid, busy;
  idx_t out_idx;
  sample_t out_data;
  step_t dt_step;
  int checks = 0, failures = 0;
  sample_t frame [256];
  real worst_ref = 0.0;

  interpolation_block dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  function automatic real signal(input real step);
    real s = step;
    while (s >= 256.0) s -= 256.0;
    while (s < 0.0) s += 256.0;
    return $sin(2.0 * PI * s / 256.0)
           - 0.35 * $exp(-((s - 145.0) * (s - 145.0)) / (2.0 * 2.0 * 2.0));
  endfunction

  function automatic real gauss();            // Box-Muller
    real u1 = (real'($urandom_range(1, 1_000_000))) / 1_000_001.0;
    real u2 = (real'($urandom_range(0, 1_000_000))) / 1_000_001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * PI * u2);
  endfunction

  int corner [5] = '{64, 141, 143, 147, 150};

  initial begin
    automatic int d = int'(100_000.0 + 20_000.0 * gauss());
    automatic real dsteps;
    automatic int t_start, n = 0;
    if (d < 0) d = 0;
    dsteps = real'(d) * 256.0 / real'(CLK_PER_FRAME);
    repeat (3) @(negedge clk);
    rst = 0;
    for (int k = 0; k < 256; k++) begin
      frame[k] = sample_t'($rtoi($floor(signal(real'(k) - dsteps) * 4096.0 + 0.5)));
      @(negedge clk);
      mu_valid = 1; mu_data = frame[k]; drdy = (k == 255);
    end
    @(negedge clk);
    mu_valid = 0; drdy = 0;
    meas_delay = PRIM_W'(d);
    start = 1;
    t_start = $time / 10;
    @(negedge clk) start = 0;
    while (n < 256) begin
      @(negedge clk);
      if (out_valid) begin
        automatic real u = real'(out_idx) + q12(longint'(dt_step));
        automatic int fl = $rtoi($floor(u));
        automatic real yw[15];
        automatic real want, got;
        for (int m = 0; m < 15; m++) yw[m] = q12(longint'(frame[(fl - 7 + m + 512) % 256]));
        want = lagrange15(yw, u - real'(fl - 7));
        got = q12(longint'(out_data));
        if (absr(got - want) > worst_ref) worst_ref = absr(got - want);
        check(absr(got - want) < 6.0e-3, $sformatf("x=%0d got %f lagrange %f", out_idx, got, want));
        foreach (corner[c])
          if (int'(out_idx) == corner[c])
            $display("corner %0d (step %0d): corrected %f true %f |error| %g",
                     c + 1, corner[c], got, signal(real'(corner[c])), absr(got - signal(real'(corner[c]))));
        n++;
      end
    end
    check(($time / 10) - t_start < 2_000_000, "frame corrected within 20 ms");
    $display("delay %0d clocks (%f steps), frame time %0d clocks, worst error vs Lagrange %g",
             d, dsteps, ($time / 10) - t_start, worst_ref);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
