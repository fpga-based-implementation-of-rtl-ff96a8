// tb_primary_counter_block -- drives SP and DRDY by hand and checks the
// measured delay (DRDY d clocks after SP gives d), the one-clock delay_valid
// pulse, the zero-delay case, the data-lost pulse when DRDY never comes, and
// that the counter keeps measuring after a data loss.
module tb_primary_counter_block;
  localparam int LIMIT = 50;
  logic clk = 0, rst = 1, sp = 0, drdy = 0;
  logic [24:0] meas_delay;
  logic delay_valid, data_lost, counting;
  int checks = 0, failures = 0;
  int n_valid = 0, n_lost = 0;

  primary_counter_block #(.LIMIT(LIMIT)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  always @(posedge clk) begin
    if (!rst && delay_valid) n_valid++;
    if (!rst && data_lost) n_lost++;
  end

  // SP in one cycle, DRDY d cycles later; check Register_1 afterwards
  task automatic measure(input int d);
    @(negedge clk) sp = 1;
    if (d == 0) drdy = 1;
    @(negedge clk) begin sp = 0; drdy = 0; end
    if (d > 0) begin
      repeat (d - 1) @(negedge clk);
      drdy = 1;
      @(negedge clk) drdy = 0;
    end
    check(delay_valid == 1, $sformatf("delay_valid after d=%0d", d));
    check(meas_delay == 25'(d), $sformatf("meas_delay %0d for d=%0d", meas_delay, d));
    @(negedge clk);
    check(delay_valid == 0, "delay_valid is one clock");
    check(counting == 0, "latch cleared by DRDY");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    check(meas_delay == 0 && !counting, "reset state");
    measure(1);
    measure(7);
    measure(49);
    measure(0);
    repeat (5) @(negedge clk);
    // SP, then no DRDY: data lost after LIMIT clocks
    @(negedge clk) sp = 1;
    @(negedge clk) sp = 0;
    for (int k = 1; k < LIMIT; k++) begin
      check(data_lost == 0, "no early data lost");
      @(negedge clk);
    end
    @(negedge clk);
    check(data_lost == 1, "data lost after LIMIT clocks");
    check(counting == 1, "latch stays set after data lost");
    check(meas_delay == 0, "Register_1 kept on data lost");
    @(negedge clk);
    check(data_lost == 0, "data lost is one clock");
    // the counter restarted at the carry: DRDY 10 clocks later reads 11
    repeat (9) @(negedge clk);
    drdy = 1;
    @(negedge clk) drdy = 0;
    check(delay_valid && meas_delay == 25'd11, $sformatf("measure after loss %0d", meas_delay));
    // DRDY without SP does nothing
    repeat (5) @(negedge clk);
    drdy = 1;
    @(negedge clk) drdy = 0;
    check(!delay_valid, "DRDY alone ignored");
    check(n_valid == 5 && n_lost == 1, $sformatf("event counts %0d %0d", n_valid, n_lost));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
