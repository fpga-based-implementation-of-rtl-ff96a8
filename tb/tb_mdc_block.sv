// tb_mdc_block -- runs the measurement delay computation block for several
// frames at a short frame (PERIOD = 200 clocks, 4 frames per "second") with
// a merging unit whose DRDY follows each Sampling Pulse by a chosen delay.
// Checks the SP period, every measured delay, a data-lost frame (no DRDY)
// and the Sync Status for a correct and a wrong 1PPS spacing.
module tb_mdc_block;
  localparam int PERIOD = 200;
  localparam int SPPS   = 4;
  logic clk = 0, rst = 1, drdy = 0, pps = 0;
  logic sp, delay_valid, data_lost, sync_status, status_valid;
  logic [24:0] meas_delay;
  int checks = 0, failures = 0;
  longint cyc = 0, last_sp = -1;
  int n_sp = 0, n_lost = 0, n_status = 0;

  mdc_block #(.PERIOD(PERIOD), .SP_PER_PPS_P(SPPS)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  // delays (clocks) of DRDY after the SP of frame n; -1 = no DRDY (lost)
  int delay_of [12] = '{17, 3, 199, 100, -1, 40, 1, 88, 5, 120, 60, 30};
  int frame = 0;
  int pending = -1;       // expected meas_delay once DRDY has been given

  always @(posedge clk) if (!rst) begin
    cyc <= cyc + 1;
    if (sp) begin
      if (last_sp >= 0) check(cyc - last_sp == PERIOD, "SP period");
      last_sp = cyc;
      n_sp++;
    end
    if (delay_valid) begin
      check(pending >= 0 && meas_delay == 25'(pending),
            $sformatf("meas_delay %0d expected %0d", meas_delay, pending));
      pending = -1;
    end
    if (data_lost) n_lost++;
    if (status_valid) n_status++;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (frame = 0; frame < 12; frame++) begin
      @(posedge clk iff sp);
      @(negedge clk);
      if (delay_of[frame] >= 0) begin
        repeat (delay_of[frame] - 1) @(negedge clk);
        drdy = 1;
        pending = delay_of[frame];
        @(negedge clk) drdy = 0;
      end
      if (frame == 3) begin
        // 4th SP of the second already seen: 1PPS now is on time
        pps = 1;
        @(negedge clk);
        check(status_valid && sync_status == 0, "on-time 1PPS gives status 0");
        pps = 0;
      end
      if (frame == 5) begin
        // only two SPs since the last 1PPS: status must flag a fault
        pps = 1;
        @(negedge clk);
        check(status_valid && sync_status == 1, "early 1PPS gives status 1");
        pps = 0;
      end
    end
    repeat (5) @(negedge clk);
    check(n_lost == 1, $sformatf("one data-lost frame, saw %0d", n_lost));
    check(n_status == 2, "two status updates");
    check(n_sp == 12, "SP count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * PERIOD) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
