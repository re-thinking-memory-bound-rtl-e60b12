// tb_store_buffer: store buffer of missed stores. Random stores (coalescing
// on a word match, otherwise allocating the lowest free slot) and random
// frees; lookup, contents and full flag checked against a model.
//
// Timing: writes and frees on the rising edge; lookup combinational. The
// buffer supports the paper's write-allocate L1; its 8-entry size and word
// coalescing are own choices.
`timescale 1ns/1ps
module tb_store_buffer;
  localparam int N = 8;
  logic clk = 0, rst_n = 0, lk_hit, wr_en = 0, full;
  logic [31:0] lk_addr = 0, wr_addr = 0, wr_data = 0;
  logic [2:0] lk_idx, alloc_idx;
  logic [N-1:0] free_mask = 0, e_valid;
  logic [31:0] e_addr [N], e_data [N];
  int checks = 0, failures = 0, n_coal = 0, n_full = 0;
  bit m_v [N]; logic [31:0] m_a [N], m_d [N];
  always #5 clk = ~clk;
  store_buffer #(.N(N)) dut (.*);
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    for (int i = 0; i < N; i++) m_v[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      int mh, mf; bit mfull;
      @(negedge clk);
      lk_addr = 32'h8000 + 4 * ($urandom % 16); wr_addr = lk_addr; wr_data = $urandom;
      mh = -1; mf = -1; mfull = 1;
      for (int i = N-1; i >= 0; i--) begin
        if (!m_v[i]) begin mf = i; mfull = 0; end
        if (m_v[i] && m_a[i][31:2] == lk_addr[31:2]) mh = i;
      end
      wr_en = (mh >= 0 || !mfull) && ($urandom % 2);
      free_mask = '0;
      for (int i = 0; i < N; i++) if (m_v[i] && ($urandom % 40 == 0) && !(wr_en && i == mh)) free_mask[i] = 1;
      #1;
      chk(full == mfull, "full");
      chk(lk_hit == (mh >= 0) && (mh < 0 || lk_idx == 3'(mh)), "lookup");
      chk(mfull || alloc_idx == 3'(mf), "alloc index");
      for (int i = 0; i < N; i++) if (m_v[i]) chk(e_valid[i] && e_addr[i] == m_a[i] && e_data[i] == m_d[i], "entry");
      if (mfull) n_full++;
      @(posedge clk);
      for (int i = 0; i < N; i++) if (free_mask[i]) m_v[i] = 0;
      if (wr_en) begin
        int k;
        k = (mh >= 0) ? mh : mf;
        if (mh >= 0) n_coal++;
        m_v[k] = 1; m_a[k] = wr_addr; m_d[k] = wr_data;
      end
    end
    chk(n_coal > 0 && n_full > 0, "coalescing and full both exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
