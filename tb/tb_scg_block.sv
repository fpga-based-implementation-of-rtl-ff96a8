// tb_scg_block -- checks that the Sampling Checkpoint Generator raises a
// one-clock Sampling Pulse exactly every PERIOD clocks, both at a small
// period and at the paper's 2,000,000 clocks (20 ms at 100 MHz).
module tb_scg_block;
  logic clk = 0, rst = 1;
  int checks = 0, failures = 0;
  logic sp_s, sp_f;
  logic [20:0] cnt_s, cnt_f;
  longint cyc = 0;

  scg_block #(.PERIOD(100)) dut_s (.clk, .rst, .sp(sp_s), .count(cnt_s));
  scg_block                 dut_f (.clk, .rst, .sp(sp_f), .count(cnt_f));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  // cycle counter: cycle 1 is the first cycle after reset release
  longint last_s = 0, last_f = 0;
  int n_s = 0, n_f = 0;
  always @(posedge clk) if (!rst) begin
    cyc <= cyc + 1;
    if (sp_s) begin
      check(cyc - last_s == 100, "small period");
      last_s = cyc; n_s++;
    end
    if (sp_f) begin
      check(cyc - last_f == 2_000_000, "20 ms period");
      check(cnt_f == 21'd2_000_000, "AND_1 decodes 2,000,000");
      last_f = cyc; n_f++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    wait (n_f == 2);
    @(posedge clk);
    check(n_s >= 39999, "small SP count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4_100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
