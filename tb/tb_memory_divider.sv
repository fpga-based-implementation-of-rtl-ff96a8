// tb_memory_divider -- writes two frames of 256 random samples (DRDY with the
// last sample of each) and reads windows at random positions, including ones
// that run off either end of the frame; y[m] must be sample (base+m) mod 256
// of the last complete frame, one clock after base is applied.
module tb_memory_divider;
  import dfc_pkg::*;
  logic clk = 0, rst = 1, wr_valid = 0, drdy = 0;
  sample_t wr_data;
  xm_t base;
  sample_t y [NPTS];
  idx_t wr_ptr;
  sample_t ref_mem [256];
  int checks = 0, failures = 0;

  memory_divider dut (.*);

  always #5 clk = ~clk;

  task automatic write_frame();
    for (int k = 0; k < 256; k++) begin
      @(negedge clk);
      wr_valid = 1;
      wr_data = sample_t'($urandom);
      ref_mem[k] = wr_data;
      drdy = (k == 255);
      @(negedge clk);
      wr_valid = 0; drdy = 0;
      if (k == 255) begin
        checks++;
        if (wr_ptr != 0) begin failures++; $display("FAIL pointer not reset by DRDY"); end
      end
    end
  endtask

  task automatic read_windows(input int n);
    for (int k = 0; k < n; k++) begin
      automatic int b = $urandom_range(0, 280) - 12;
      @(negedge clk);
      base = xm_t'(b);
      @(negedge clk);
      for (int m = 0; m < int'(NPTS); m++) begin
        checks++;
        if (y[m] != ref_mem[(b + m + 256) % 256]) begin
          failures++;
          $display("FAIL base=%0d m=%0d got %0d want %0d", b, m, y[m], ref_mem[(b + m + 256) % 256]);
        end
      end
    end
  endtask

  initial begin
    base = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    write_frame();
    read_windows(200);
    write_frame();
    read_windows(200);
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
