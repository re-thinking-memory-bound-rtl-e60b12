// tb_runahead_ctrl: checks entry into runahead (a crossbar waiting on a
// miss, runahead enabled, no hold), the save pulse, that the triggering
// (crossbar, MSHR) pair is remembered, that fills of other MSHRs or other
// crossbars do not end runahead, that the matching fill restores, and the
// entry / cycle counters. Randomised over many episodes.
//
// Timing: inputs driven at the negative edge; save/restore are one-cycle
// pulses checked after the rising edge. Entering runahead on a stalling miss
// follows the paper; exit on the triggering (crossbar, MSHR) fill is an own
// choice.
`timescale 1ns/1ps
module tb_runahead_ctrl;
  localparam int N_X = 4, MSHR_N = 16;
  logic clk = 0, rst_n = 0, ra_en = 0, hold = 0;
  logic wait_any [N_X], fill_done [N_X];
  logic [3:0] wait_mshr [N_X], fill_mshr [N_X];
  logic ra_mode, save, enter_ra, restore;
  logic [31:0] n_entries, n_ra_cycles;
  int checks = 0, failures = 0, m_ent = 0, m_cyc = 0;
  always #5 clk = ~clk;
  runahead_ctrl #(.N_X(N_X), .MSHR_N(MSHR_N)) dut (.*);
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  task automatic idle_inputs();
    for (int x = 0; x < N_X; x++) begin wait_any[x] = 0; wait_mshr[x] = 0; fill_done[x] = 0; fill_mshr[x] = 0; end
  endtask

  initial begin
    idle_inputs();
    repeat (2) @(negedge clk);
    rst_n = 1;
    // disabled: a wait does not enter runahead
    @(negedge clk); wait_any[1] = 1; #1 chk(!enter_ra, "no entry when disabled");
    ra_en = 1; hold = 1; #1 chk(!enter_ra, "no entry while held");
    idle_inputs(); hold = 0;
    @(negedge clk);
    for (int ep = 0; ep < 200; ep++) begin
      int tx, tm, len;
      @(negedge clk); idle_inputs();
      tx = -1;
      for (int x = 0; x < N_X; x++) if ($urandom % 2) begin
        wait_any[x] = 1; wait_mshr[x] = 4'($urandom);
        if (tx < 0) tx = x;
      end
      if (tx < 0) begin tx = 2; wait_any[2] = 1; wait_mshr[2] = 4'($urandom); end
      tm = wait_mshr[tx];
      #1 chk(enter_ra && save && !ra_mode, "entry and save");
      m_ent++;
      @(negedge clk); idle_inputs();
      len = 1 + $urandom % 20;
      for (int t = 0; t < len; t++) begin
        // distracting fills: wrong MSHR on the triggering crossbar, or other crossbars
        fill_done[tx] = 1; fill_mshr[tx] = 4'(tm + 1 + $urandom % 15);
        fill_done[(tx + 1) % N_X] = 1; fill_mshr[(tx + 1) % N_X] = 4'(tm);
        wait_any[$urandom % N_X] = 1;
        #1 chk(ra_mode && !restore && !enter_ra, "stay in runahead");
        m_cyc++;
        @(negedge clk); idle_inputs();
      end
      fill_done[tx] = 1; fill_mshr[tx] = 4'(tm);
      #1 chk(restore && ra_mode && !save, "restore on the triggering fill");
      m_cyc++;
      @(negedge clk); idle_inputs();
      #1 chk(!ra_mode, "normal mode after restore");
    end
    chk(n_entries == m_ent, $sformatf("entries %0d vs %0d", n_entries, m_ent));
    chk(n_ra_cycles == m_cyc, $sformatf("runahead cycles %0d vs %0d", n_ra_cycles, m_cyc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
