// tb_miss_monitor: drives random miss pulses from four L1 caches and checks
// that `trigger` fires exactly at the end of each window whose miss count
// exceeds the threshold, that `last_misses` holds the window count, and
// that disabling the monitor restarts the window.
//
// Timing: one miss pulse per source per cycle at most; the window counter
// advances every enabled cycle. The time-window miss count compared with a
// threshold register follows the paper; the strict '>' test and reset of the
// count per window are own choices.
`timescale 1ns/1ps
module tb_miss_monitor;
  logic clk = 0, rst_n = 0, enable = 0, trigger;
  logic [31:0] threshold = 0, window = 0, last_misses;
  logic [3:0] miss = 0;
  int checks = 0, failures = 0, n_trig = 0, n_quiet = 0;
  int cyc = 0, cnt = 0;
  always #5 clk = ~clk;
  miss_monitor #(.N_SRC(4)) dut (.*);
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    threshold = 20; window = 50;
    for (int n = 0; n < 20000; n++) begin
      bit we; int c;
      @(negedge clk);
      if (n % 3000 == 2999) enable = 0; else enable = 1;
      miss = (n / 700) % 2 ? 4'($urandom) : 4'($urandom % 2 ? 1 : 0);
      #1;
      c = cnt + $countones(miss);
      we = enable && (cyc + 1 >= window);
      chk(trigger == (we && c > threshold), $sformatf("trigger at n=%0d", n));
      if (we && c > threshold) n_trig++;
      if (we && c <= threshold) n_quiet++;
      @(posedge clk);
      if (!enable) begin cyc = 0; cnt = 0; end
      else if (we) begin cyc = 0; cnt = 0; #1 chk(last_misses == c, "last_misses"); end
      else begin cyc++; cnt = c; end
    end
    chk(n_trig > 0 && n_quiet > 0, "both triggering and quiet windows seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
