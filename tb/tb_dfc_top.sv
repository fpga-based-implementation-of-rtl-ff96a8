// tb_dfc_top -- end-to-end test of the data frame correction system with a
// shortened frame (PERIOD = 76,800 clocks, 300 clocks per sample step, 4
// frames per 1PPS second) so that ten frames simulate quickly.
//
// A merging-unit model writes 256 samples per frame, sampled from a sine
// that lags the true signal by the frame's delay, and raises DRDY with the
// last sample, d clocks after the Sampling Pulse. The test checks for every
// frame: the measured delay equals d, 256 corrected samples follow with the
// expected latency, and each matches the undelayed sine. It also exercises
// and counts each mechanism: delay measurement and correction, wrap past the
// frame end, a data-lost frame (no DRDY: data_lost pulses, nothing is
// corrected), on-time 1PPS (status 0) and an early 1PPS (status 1).
module tb_dfc_top;
  import dfc_pkg::*;
  import tb_ref_pkg::*;
  localparam int PERIOD = 76_800;
  localparam int SPPS   = 4;
  localparam int NF     = 10;
  localparam int GAP    = 290;                 // clocks between MU samples

  logic clk = 0, rst = 1, drdy = 0, mu_valid = 0, pps = 0;
  sample_t mu_data = '0;
  logic sync_status, status_valid, data_lost, sp, delay_valid, actual_valid, busy;
  logic [PRIM_W-1:0] meas_delay;
  idx_t actual_idx;
  sample_t actual_data;

  dfc_top #(.PERIOD(PERIOD), .SP_PER_PPS_P(SPPS)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  // per-frame DRDY delay in clocks; -1 = the MU never raises DRDY
  int dly [NF] = '{1000, 2500, 800, 40_000, 39_000, -1, 37_000, 76_000, 75_000, 74_000};
  real phase [NF];
  int n_corrected = 0, n_lost = 0, n_sync_ok = 0, n_sync_fault = 0, n_wrap = 0;
  int n_sp = 0;
  int exp_frame = -1;                           // frame whose result is expected
  real worst = 0.0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  function automatic real signal(input int f, input real step);
    return 0.9 * $sin(2.0 * PI * step / 256.0 + phase[f]);
  endfunction

  always @(posedge clk) if (!rst) cyc <= cyc + 1;

  // ---- merging-unit model -------------------------------------------------
  initial begin
    for (int f = 0; f < NF; f++) phase[f] = 0.37 * f;
    wait (!rst);
    for (int f = 0; f < NF; f++) begin
      automatic int d = (dly[f] < 0) ? 38_000 : dly[f];
      automatic longint t_last = longint'(f + 1) * PERIOD + d;   // cycle of DRDY
      automatic real dsteps = real'(d) * 256.0 / real'(PERIOD);
      for (int k = 0; k < 256; k++) begin
        automatic longint t = t_last - longint'(255 - k) * GAP;
        while (cyc < t) @(negedge clk);
        mu_valid = 1;
        mu_data = sample_t'($rtoi($floor(signal(f, real'(k) - dsteps) * 4096.0 + 0.5)));
        drdy = (k == 255) && (dly[f] >= 0);
        @(negedge clk);
        mu_valid = 0; drdy = 0;
      end
    end
  end

  // ---- GPS 1PPS model: on time after SP 4 and 8, early after SP 9 ----------
  initial begin
    wait (!rst);
    for (int s = 0; s < 3; s++) begin
      automatic longint t = (s == 2) ? longint'(9) * PERIOD + 50 : longint'(4 * (s + 1)) * PERIOD + 50;
      while (cyc < t) @(negedge clk);
      pps = 1;
      repeat (100) @(negedge clk);
      pps = 0;
    end
  end

  // ---- observers --------------------------------------------------------------
  always @(negedge clk) if (!rst) begin
    if (sp) n_sp++;
    if (status_valid) begin
      if (n_sp == 9) begin
        check(sync_status == 1, "early 1PPS flags a fault");
        if (sync_status) n_sync_fault++;
      end else begin
        check(sync_status == 0, $sformatf("on-time 1PPS after %0d SPs", n_sp));
        if (!sync_status) n_sync_ok++;
      end
    end
    if (data_lost) begin
      check(n_sp == 7 && dly[5] < 0, $sformatf("data lost after SP %0d", n_sp));
      n_lost++;
    end
    if (delay_valid) begin
      exp_frame = n_sp - 1;
      check(exp_frame >= 0 && dly[exp_frame] >= 0 && meas_delay == PRIM_W'(dly[exp_frame]),
            $sformatf("frame %0d delay %0d", exp_frame, meas_delay));
      if (dut.u_interp.dt_step != '0 || meas_delay != 0) n_wrap++;
    end
    if (actual_valid) begin
      automatic real got = q12(longint'(actual_data));
      automatic real want = signal(exp_frame, real'(actual_idx));
      automatic real e = absr(got - want);
      if (e > worst) worst = e;
      check(e < 6.0e-3, $sformatf("frame %0d x=%0d got %f want %f", exp_frame, actual_idx, got, want));
      if (actual_idx == 8'd255) n_corrected++;
    end
  end

  // latency: the first corrected sample leaves INTERP_LATENCY+1 clocks after DRDY
  longint t_drdy = -1;
  always @(negedge clk) if (!rst) begin
    if (drdy) t_drdy = cyc;
    if (actual_valid && actual_idx == 0)
      check(cyc - t_drdy == INTERP_LATENCY + 1, $sformatf("DRDY-to-output %0d", cyc - t_drdy));
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    while (cyc < longint'(NF) * PERIOD + 78_000) @(negedge clk);
    $display("frames corrected %0d, data lost %0d, sync ok %0d, sync fault %0d, shifted %0d, worst error %g",
             n_corrected, n_lost, n_sync_ok, n_sync_fault, n_wrap, worst);
    check(n_corrected == 9, "nine frames corrected");
    check(n_lost == 1, "data-lost mechanism seen once");
    check(n_sync_ok == 2, "on-time 1PPS seen twice");
    check(n_sync_fault == 1, "sync fault seen once");
    check(n_wrap >= 1, "shift past the frame end seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((NF + 3) * PERIOD) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
