// tb_access_tracker: triggers a tracking window, drives random accesses on
// eight memory PEs and checks the recorded {address, time} samples, the
// per-PE counts (capped at DEPTH), the interrupt at window end, that a
// trigger is ignored while the interrupt is pending, and irq_clr.
//
// Timing: accesses are driven at the negative edge and sampled by the tracker on
// the next rising edge; the model stamps each sample with the cycle count since
// the trigger. The windowed sampling and interrupt follow the paper's tracker;
// the sample depth of 64 and the {address, 16-bit time} format are own choices.
`timescale 1ns/1ps
module tb_access_tracker;
  localparam int N_PE = 8, DEPTH = 64;
  logic clk = 0, rst_n = 0, trigger = 0, active, irq, irq_clr = 0;
  logic [31:0] window = 0;
  logic [N_PE-1:0] acc_valid = 0;
  logic [31:0] acc_addr [N_PE];
  logic [2:0] rd_pe = 0;
  logic [5:0] rd_idx = 0;
  logic [31:0] rd_addr;
  logic [15:0] rd_time;
  logic [6:0] count [N_PE];
  int checks = 0, failures = 0;
  logic [31:0] m_a [N_PE][$];
  logic [15:0] m_t [N_PE][$];
  always #5 clk = ~clk;
  access_tracker #(.N_PE(N_PE), .DEPTH(DEPTH)) dut (.*);
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  task automatic run_window(int win, int dens);
    for (int p = 0; p < N_PE; p++) begin m_a[p] = {}; m_t[p] = {}; end
    @(negedge clk); window = win; trigger = 1;
    @(negedge clk); trigger = 0;
    chk(active, "window active after trigger");
    for (int t = 0; t < win; t++) begin
      for (int p = 0; p < N_PE; p++) begin
        acc_valid[p] = ($urandom % 100) < dens;
        acc_addr[p]  = $urandom;
        if (acc_valid[p] && m_a[p].size() < DEPTH) begin m_a[p].push_back(acc_addr[p]); m_t[p].push_back(16'(t)); end
      end
      @(negedge clk);
    end
    acc_valid = '0;
    chk(!active && irq, "irq at window end");
    for (int p = 0; p < N_PE; p++) begin
      chk(count[p] == 7'(m_a[p].size()), $sformatf("count pe %0d: %0d vs %0d", p, count[p], m_a[p].size()));
      for (int i = 0; i < m_a[p].size(); i++) begin
        rd_pe = 3'(p); rd_idx = 6'(i); #1;
        chk(rd_addr == m_a[p][i] && rd_time == m_t[p][i], $sformatf("sample pe %0d idx %0d", p, i));
      end
    end
  endtask

  initial begin
    for (int p = 0; p < N_PE; p++) acc_addr[p] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_window(40, 50);
    // pending irq blocks a new window
    @(negedge clk); trigger = 1; @(negedge clk); trigger = 0;
    chk(!active, "trigger ignored while irq pending");
    irq_clr = 1; @(negedge clk); irq_clr = 0;
    chk(!irq, "irq cleared");
    run_window(300, 40);   // overflows DEPTH on most PEs
    irq_clr = 1; @(negedge clk); irq_clr = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
