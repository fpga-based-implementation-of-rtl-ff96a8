// tb_dfc_top_full -- one complete operation of the data frame correction
// system at its real size: 100 MHz clock, 2,000,000 clocks per 20 ms frame,
// 256 samples per frame, 50 frames per 1PPS second (no parameter overrides).
//
// A merging-unit model writes one frame of a sine sampled with a delay of
// 123,457 clocks (1.23457 ms, 15.8 sample steps) and raises DRDY with the
// last sample, 123,457 clocks after the first Sampling Pulse. The test checks
// the first SP at clock 2,000,000, the measured delay, the 256 corrected
// samples against the undelayed sine, and the DRDY-to-output latency.
module tb_dfc_top_full;
  import dfc_pkg::*;
  import tb_ref_pkg::*;
  localparam int D   = 123_457;
  localparam int GAP = 7_812;                  // clocks between MU samples

  logic clk = 0, rst = 1, drdy = 0, mu_valid = 0, pps = 0;
  sample_t mu_data = '0;
  logic sync_status, status_valid, data_lost, sp, delay_valid, actual_valid, busy;
  logic [PRIM_W-1:0] meas_delay;
  idx_t actual_idx;
  sample_t actual_data;

  dfc_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0, t_drdy = -1;
  int n_out = 0, n_sp = 0, n_valid = 0, n_lost = 0;
  real worst = 0.0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  function automatic real signal(input real step);
    return 0.95 * $sin(2.0 * PI * step / 256.0 - 0.8);
  endfunction

  always @(posedge clk) if (!rst) cyc <= cyc + 1;

  // merging unit: sample k is written (255-k)*GAP clocks before DRDY
  initial begin
    automatic longint t_last = longint'(CLK_PER_FRAME) + D;
    automatic real dsteps = real'(D) * 256.0 / real'(CLK_PER_FRAME);
    wait (!rst);
    for (int k = 0; k < 256; k++) begin
      automatic longint t = t_last - longint'(255 - k) * GAP;
      while (cyc < t) @(negedge clk);
      mu_valid = 1;
      mu_data = sample_t'($rtoi($floor(signal(real'(k) - dsteps) * 4096.0 + 0.5)));
      drdy = (k == 255);
      if (drdy) t_drdy = cyc;
      @(negedge clk);
      mu_valid = 0; drdy = 0;
    end
  end

  always @(negedge clk) if (!rst) begin
    if (sp) begin
      check(cyc == longint'(CLK_PER_FRAME), $sformatf("first SP at %0d", cyc));
      n_sp++;
    end
    if (delay_valid) begin
      check(meas_delay == PRIM_W'(D), $sformatf("measured delay %0d", meas_delay));
      n_valid++;
    end
    if (data_lost) n_lost++;
    if (actual_valid) begin
      automatic real got = q12(longint'(actual_data));
      automatic real e = absr(got - signal(real'(actual_idx)));
      if (e > worst) worst = e;
      if (n_out == 0)
        check(cyc - t_drdy == INTERP_LATENCY + 1, $sformatf("latency %0d", cyc - t_drdy));
      check(actual_idx == idx_t'(n_out), "index order");
      check(e < 6.0e-3, $sformatf("x=%0d got %f want %f", actual_idx, got, signal(real'(actual_idx))));
      n_out++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    wait (n_out == 256);
    repeat (20) @(negedge clk);
    check(n_out == 256 && n_valid == 1 && n_sp == 1, "one frame corrected");
    check(n_lost == 0, "no data lost");
    $display("corrected %0d samples, worst error %g", n_out, worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
