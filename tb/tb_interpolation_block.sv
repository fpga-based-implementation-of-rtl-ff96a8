// tb_interpolation_block -- fills the frame memory with a sampled sine wave
// that lags by a known delay, starts the block with that delay in clocks and
// checks the corrected frame:
//  * 256 outputs, indices 0..255 in order, one per clock, the first exactly
//    INTERP_LATENCY clocks after start;
//  * each output against double-precision 15-point Lagrange interpolation of
//    the stored samples at x + dt (window and wrap as in the RTL);
//  * each output against the undelayed sine itself.
// Delays cover 0, fractions of a step, and shifts that wrap past the frame end.
module tb_interpolation_block;
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
  real worst_ref = 0.0, worst_sig = 0.0;

  interpolation_block dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  function automatic real signal(input real step);   // true line signal
    return 0.9 * $sin(2.0 * PI * step / 256.0 + 0.3);
  endfunction

  task automatic run(input int unsigned d);
    real dsteps = real'(d) * 256.0 / real'(CLK_PER_FRAME);
    int t_start, t_first, n;
    // measured sample k is the signal at k - dt (it was taken late)
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
    n = 0;
    while (n < 256) begin
      @(negedge clk);
      if (out_valid) begin
        automatic real u = real'(out_idx) + q12(longint'(dt_step));
        automatic int fl = $rtoi($floor(u));
        automatic real yw[15];
        automatic real want, got, e_ref, e_sig;
        if (n == 0) begin
          t_first = $time / 10;
          check(t_first - t_start == INTERP_LATENCY,
                $sformatf("latency %0d", t_first - t_start));
        end else begin
          check(($time / 10) - t_first == n, "one sample per clock");
        end
        check(out_idx == idx_t'(n), $sformatf("index %0d expected %0d", out_idx, n));
        for (int m = 0; m < 15; m++) yw[m] = q12(longint'(frame[(fl - 7 + m + 512) % 256]));
        want = lagrange15(yw, u - real'(fl - 7));
        got = q12(longint'(out_data));
        e_ref = absr(got - want);
        e_sig = absr(got - signal(real'(n)));
        if (e_ref > worst_ref) worst_ref = e_ref;
        if (e_sig > worst_sig) worst_sig = e_sig;
        check(e_ref < 6.0e-3, $sformatf("x=%0d d=%0d got %f lagrange %f", n, d, got, want));
        check(e_sig < 6.0e-3, $sformatf("x=%0d d=%0d got %f signal %f", n, d, got, signal(real'(n))));
        n++;
      end
    end
    @(negedge clk);
    check(!out_valid, "exactly 256 outputs");
    repeat (3) @(negedge clk);
    check(!busy, "idle after the frame");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    run(0);
    run(1234);
    run(7812);
    run(123_457);
    run(1_000_000);
    run(1_999_999);
    $display("worst error vs Lagrange %g, vs signal %g", worst_ref, worst_sig);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
