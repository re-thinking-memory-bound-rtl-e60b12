// tb_reconfig_ctrl: applies way re-assignments and line-size changes and
// checks the sequence: hold until runahead ends and all L1s are idle, one
// flush pulse with masks that select exactly the ways leaving their
// controller (or all ways of a controller whose line size changes), wait
// for the flushes, then one permission write per way with the requested
// value, then the new line sizes. A small permission-register model plays
// the role of the way pool.
`timescale 1ns/1ps
module tb_reconfig_ctrl;
  localparam int N_WAYS = 32, N_CTRL = 4;
  logic clk = 0, rst_n = 0, apply = 0, ra_mode = 0;
  logic [3:0] rr_perm [N_WAYS], perm [N_WAYS];
  logic [1:0] rr_m [N_CTRL], line_m [N_CTRL];
  logic l1_idle [N_CTRL];
  logic hold, busy, perm_we;
  logic flush_start [N_CTRL];
  logic [N_WAYS-1:0] flush_mask [N_CTRL];
  logic [4:0] perm_way;
  logic [3:0] perm_val;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  reconfig_ctrl #(.N_WAYS(N_WAYS), .N_CTRL(N_CTRL)) dut (.*);
  always @(posedge clk or negedge rst_n)
    if (!rst_n) for (int w = 0; w < N_WAYS; w++) perm[w] <= 4'(w / 8);
    else if (perm_we) perm[perm_way] <= perm_val;
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    for (int c = 0; c < N_CTRL; c++) begin l1_idle[c] = 1; rr_m[c] = 1; end
    for (int w = 0; w < N_WAYS; w++) rr_perm[w] = 4'(w / 8);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < N_CTRL; c++) chk(line_m[c] == 1, "64 B lines after reset");
    for (int ep = 0; ep < 30; ep++) begin
      logic [3:0] old [N_WAYS];
      logic [1:0] oldm [N_CTRL];
      int nflush, nwrite;
      nflush = 0; nwrite = 0;
      for (int w = 0; w < N_WAYS; w++) begin
        old[w] = perm[w];
        rr_perm[w] = ($urandom % 3 == 0) ? (($urandom % 5 == 4) ? 4'hF : 4'($urandom % 4)) : perm[w];
      end
      for (int c = 0; c < N_CTRL; c++) begin oldm[c] = line_m[c]; rr_m[c] = ($urandom % 4 == 0) ? 2'($urandom % 3) : line_m[c]; end
      @(negedge clk); apply = 1; ra_mode = 1; l1_idle[1] = 0;
      @(negedge clk); apply = 0;
      repeat (5) begin chk(hold && !flush_start[0] && !perm_we, "held while runahead / busy"); @(negedge clk); end
      ra_mode = 0;
      repeat (3) begin chk(hold && !flush_start[0], "held while an L1 is busy"); @(negedge clk); end
      l1_idle[1] = 1;
      // flush pulse
      while (!flush_start[0]) @(negedge clk);
      for (int c = 0; c < N_CTRL; c++)
        for (int w = 0; w < N_WAYS; w++)
          chk(flush_mask[c][w] == (old[w] == 4'(c) && (rr_perm[w] != old[w] || rr_m[c] != oldm[c])),
              $sformatf("flush mask c%0d w%0d", c, w));
      nflush++;
      @(negedge clk);
      for (int c = 0; c < N_CTRL; c++) l1_idle[c] = 0;
      repeat (4) begin chk(!perm_we, "no permission write during flush"); @(negedge clk); end
      for (int c = 0; c < N_CTRL; c++) l1_idle[c] = 1;
      while (busy) begin
        if (perm_we) begin chk(perm_way == 5'(nwrite) && perm_val == rr_perm[nwrite], "way write order"); nwrite++; end
        chk(!flush_start[0], "single flush pulse");
        @(negedge clk);
      end
      chk(nwrite == N_WAYS, "all ways written");
      for (int w = 0; w < N_WAYS; w++) chk(perm[w] == rr_perm[w], "permission applied");
      for (int c = 0; c < N_CTRL; c++) chk(line_m[c] == rr_m[c], "line size applied");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
