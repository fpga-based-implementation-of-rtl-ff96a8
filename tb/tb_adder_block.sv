// tb_adder_block -- random sets of 15 products (small and large) are summed;
// the registered output must be their exact sum clamped to the signed 16-bit
// sample range, with valid delayed by one clock.
module tb_adder_block;
  import dfc_pkg::*;
  logic clk = 0, rst = 1, in_valid = 0, out_valid;
  prod_t terms [NPTS];
  sample_t sum;
  int checks = 0, failures = 0;
  int n_sat = 0;

  adder_block dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int k = 0; k < 3000; k++) begin
      automatic longint s = 0;
      longint want;
      automatic bit v = $urandom_range(0, 1);
      for (int i = 0; i < int'(NPTS); i++) begin
        automatic longint t = (k % 4 == 0) ? longint'($urandom_range(0, 40000)) - 20000
                                 : longint'($urandom_range(0, 8000)) - 4000;
        terms[i] = prod_t'(t);
        s += t;
      end
      in_valid = v;
      want = (s > 32767) ? 32767 : (s < -32768) ? -32768 : s;
      if (want != s) n_sat++;
      @(negedge clk);
      checks++;
      if (out_valid != v || longint'(sum) != want) begin
        failures++;
        $display("FAIL sum %0d want %0d (valid %0d/%0d)", sum, want, out_valid, v);
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL saturation never exercised"); end
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
