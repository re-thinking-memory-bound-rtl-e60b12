// tb_ra_temp_store: runahead temporary store. Random writes over a small
// address range (so coalescing and FIFO replacement both occur), lookups
// checked against a queue model, and `clear` empties the store.
//
// Timing: writes on the rising edge, lookups combinational. The temporary store
// for runahead writes follows the paper; a separate 16-entry store with FIFO
// replacement (instead of an SPM partition) is an own choice.
`timescale 1ns/1ps
module tb_ra_temp_store;
  localparam int ENTRIES = 16;
  logic clk = 0, rst_n = 0, clear = 0, wr_en = 0, rd_hit;
  logic [31:0] wr_addr = 0, wr_data = 0, rd_addr = 0, rd_data;
  int checks = 0, failures = 0;
  // model: slot array + FIFO pointer, like the hardware's replacement rule
  logic        m_v [ENTRIES];
  logic [29:0] m_t [ENTRIES];
  logic [31:0] m_d [ENTRIES];
  int m_ptr = 0, n_coal = 0, n_repl = 0;
  always #5 clk = ~clk;
  ra_temp_store #(.ENTRIES(ENTRIES)) dut (.*);

  initial begin
    for (int i = 0; i < ENTRIES; i++) m_v[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      bit hit; logic [31:0] d;
      @(negedge clk);
      clear   = ($urandom % 400) == 0;
      wr_en   = $urandom % 2;
      wr_addr = 32'h4000 + 4 * ($urandom % 40);
      wr_data = $urandom;
      rd_addr = 32'h4000 + 4 * ($urandom % 40) + ($urandom % 4);
      #1;
      hit = 0; d = 0;
      for (int i = 0; i < ENTRIES; i++) if (m_v[i] && m_t[i] == rd_addr[31:2]) begin hit = 1; d = m_d[i]; end
      checks++;
      if (rd_hit !== hit || (hit && rd_data !== d)) begin
        failures++; $display("FAIL: lookup %h hit %0d/%0d data %h/%h", rd_addr, rd_hit, hit, rd_data, d);
      end
      @(posedge clk);
      if (clear) begin
        for (int i = 0; i < ENTRIES; i++) m_v[i] = 0;
        m_ptr = 0;
      end else if (wr_en) begin
        int idx;
        idx = -1;
        for (int i = 0; i < ENTRIES; i++) if (m_v[i] && m_t[i] == wr_addr[31:2]) idx = i;
        if (idx >= 0) n_coal++;
        else begin
          if (m_v[m_ptr]) n_repl++;
          idx = m_ptr; m_ptr = (m_ptr + 1) % ENTRIES;
        end
        m_v[idx] = 1; m_t[idx] = wr_addr[31:2]; m_d[idx] = wr_data;
      end
    end
    checks++;
    if (n_coal == 0 || n_repl == 0) begin failures++; $display("FAIL: coalescing/replacement not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
