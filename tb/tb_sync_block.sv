// tb_sync_block -- feeds the synchronization block with bursts of Sampling
// Pulses between 1PPS edges and checks Sync Status: 0 after exactly 50 SPs,
// 1 after 49, 52 or 0, and (as AND_2 in the paper's figure taps only B1, B4
// and B5) 0 after 51. Also checks the one-clock status_valid pulse.
module tb_sync_block;
  logic clk = 0, rst = 1, sp = 0, pps = 0;
  logic sync_status, status_valid;
  logic [5:0] sync_count;
  int checks = 0, failures = 0;

  sync_block dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  task automatic second(input int n_sp, input bit expect_fault);
    for (int k = 0; k < n_sp; k++) begin
      @(negedge clk) sp = 1;
      @(negedge clk) sp = 0;
      @(negedge clk);
    end
    check(sync_count == 6'(n_sp), $sformatf("count %0d of %0d", sync_count, n_sp));
    @(negedge clk) pps = 1;
    @(negedge clk);
    check(status_valid == 1, "status_valid after 1PPS edge");
    check(sync_status == expect_fault, $sformatf("status after %0d SPs", n_sp));
    check(sync_count == 0, "counter cleared by 1PPS");
    repeat (4) @(negedge clk);          // 1PPS stays high for a while
    check(status_valid == 0, "status_valid one clock");
    pps = 0;
    @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    second(50, 0);
    second(49, 1);
    second(50, 0);
    second(52, 1);
    second(0, 1);
    second(51, 0);   // aliasing of the three-tap AND_2
    second(50, 0);
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
