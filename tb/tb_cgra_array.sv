// tb_cgra_array: the full 8x8 array with a two-context schedule in which
// every PE adds its west neighbour's result to a per-PE constant, so values
// ripple east one column per iteration, and the left-column memory PEs load
// from their memory port (driven by this bench). A model of all 64 results
// checks the array after every iteration; the context counter wrap at
// ctx_len, stalls (fire low), and checkpoint / restore of the whole array
// (state and context counter) are also checked.
`timescale 1ns/1ps
module tb_cgra_array;
  import cgra_pkg::*;
  localparam int ROWS = 8, COLS = 8, N_CTX = 8;
  logic clk = 0, rst_n = 0, fire = 0, save = 0, restore = 0, cfg_we = 0;
  logic [3:0] ctx_len = 2;
  logic [2:0] ctx, cfg_ctx = 0;
  logic [5:0] cfg_pe = 0;
  cfg_word_t cfg_word = '0;
  mem_req_t mem_req [ROWS];
  word_t mem_rdata [ROWS];
  always #5 clk = ~clk;
  cgra_array #(.ROWS(ROWS), .COLS(COLS), .N_CTX(N_CTX)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] res [ROWS][COLS], bkres [ROWS][COLS], dres [ROWS][COLS];
  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      assign dres[r][c] = dut.g_row[r].g_col[c].u_pe.st_q.res.v;
    end
  end
  task automatic chk(bit ok, string m);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask

  // one iteration = ctx0 then ctx1; returns after both fired
  task automatic iterate(int it);
    logic [31:0] nr [ROWS][COLS];
    @(negedge clk);
    chk(ctx == 0, "iteration starts at context 0");
    for (int r = 0; r < ROWS; r++) begin
      mem_rdata[r] = '{dmy: 1'b0, v: 32'(1000 * r + it)};
      chk(mem_req[r].valid && !mem_req[r].we, "memory PE issues its load in context 0");
    end
    // a stall cycle: nothing may change
    fire = 0; @(negedge clk);
    fire = 1; @(negedge clk);
    fire = 0;
    chk(ctx == 1, "context advanced");
    fire = 1; @(negedge clk);
    fire = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        nr[r][c] = (c == 0) ? 32'(1000 * r + it) : res[r][c-1] + 32'(r * COLS + c);
    res = nr;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        chk(dres[r][c] == res[r][c], $sformatf("PE(%0d,%0d) it %0d", r, c, it));
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++) begin
      mem_rdata[r] = '0;
      for (int c = 0; c < COLS; c++) res[r][c] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        for (int x = 0; x < 2; x++) begin
          cfg_word_t w;
          w = '0;
          w.sel_e = SRC_RES;
          if (x == 0) w.op = (c == 0) ? OP_LOAD : OP_ADD;
          else begin
            w.sel_i1 = SRC_IN_W; w.sel_i2 = SRC_CONST; w.imm = 32'(r * COLS + c); w.opnd_we = 3'b011;
          end
          @(negedge clk); cfg_we = 1; cfg_pe = 6'(r * COLS + c); cfg_ctx = 3'(x); cfg_word = w;
        end
    @(negedge clk); cfg_we = 0;
    // first iteration loads operands only (RES from the west is still 0)
    @(negedge clk); fire = 1; @(negedge clk); fire = 1; @(negedge clk); fire = 0;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++)
      res[r][c] = dres[r][c];
    for (int it = 1; it <= 12; it++) iterate(it);
    // checkpoint, run ahead three iterations, restore
    @(negedge clk); save = 1; @(negedge clk); save = 0;
    bkres = res;
    for (int it = 13; it <= 15; it++) iterate(it);
    @(negedge clk); fire = 1; @(negedge clk); fire = 0;   // leave context 1 active
    chk(ctx == 1, "mid-iteration before restore");
    @(negedge clk); restore = 1; @(negedge clk); restore = 0;
    chk(ctx == 0, "context counter restored");
    res = bkres;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++)
      chk(dres[r][c] == res[r][c], "state restored");
    for (int it = 13; it <= 20; it++) iterate(it);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
