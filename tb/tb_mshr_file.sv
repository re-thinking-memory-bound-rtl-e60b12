// tb_mshr_file: random allocate / issue / free traffic on the 16-entry MSHR
// file, checked against a model: lookup match, lowest free index, lowest
// unissued entry for issue, full and empty flags.
//
// Timing: stimulus at the negative edge, model and DUT both updated on the
// rising edge; combinational outputs checked before each edge. Fields (Valid,
// Block Address, Issued) and the 16 entries follow the paper; lowest-index
// allocation and issue order are own choices.
`timescale 1ns/1ps
module tb_mshr_file;
  localparam int N = 16, BLK_W = 27;
  logic clk = 0, rst_n = 0;
  logic [BLK_W-1:0] lk_blk = 0, alloc_blk = 0, iss_blk;
  logic lk_match, alloc = 0, full, iss_valid, iss_ack = 0, free_en = 0, empty;
  logic [3:0] lk_idx, free_idx, iss_idx, free_idx_in = 0;
  logic [BLK_W-1:0] blk_of [N];
  int checks = 0, failures = 0, n_full = 0;
  bit m_v [N], m_i [N];
  logic [BLK_W-1:0] m_b [N];
  always #5 clk = ~clk;
  mshr_file #(.N(N), .BLK_W(BLK_W)) dut (.*);

  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin m_v[i] = 0; m_i[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      int mf, mi, ml; bit mfull;
      @(negedge clk);
      lk_blk = 27'($urandom % 24);
      mf = -1; mi = -1; ml = -1; mfull = 1;
      for (int i = N-1; i >= 0; i--) begin
        if (!m_v[i]) begin mf = i; mfull = 0; end
        if (m_v[i] && !m_i[i]) mi = i;
        if (m_v[i] && m_b[i] == lk_blk) ml = i;
      end
      alloc = !mfull && ml < 0 && ($urandom % 2);
      alloc_blk = lk_blk;
      iss_ack = $urandom % 3 == 0;
      free_en = 0;
      if ($urandom % 3 == 0) begin
        int k;
        k = $urandom % N;
        if (m_v[k] && m_i[k]) begin free_en = 1; free_idx_in = 4'(k); end
      end
      #1;
      chk(full == mfull, "full");
      chk(lk_match == (ml >= 0) && (ml < 0 || lk_idx == 4'(ml)), "lookup");
      chk(mfull || free_idx == 4'(mf), "free index");
      chk(iss_valid == (mi >= 0) && (mi < 0 || (iss_idx == 4'(mi) && iss_blk == m_b[mi])), "issue");
      if (mfull) n_full++;
      @(posedge clk);
      if (free_en) begin m_v[free_idx_in] = 0; m_i[free_idx_in] = 0; end
      if (iss_ack && mi >= 0) m_i[mi] = 1;
      if (alloc) begin m_v[mf] = 1; m_i[mf] = 0; m_b[mf] = alloc_blk; end
    end
    chk(n_full > 0, "file became full at least once");
    // drain
    @(negedge clk); alloc = 0; iss_ack = 1; free_en = 0;
    repeat (N) @(negedge clk);
    iss_ack = 0;
    for (int i = 0; i < N; i++) begin free_en = 1; free_idx_in = 4'(i); @(negedge clk); end
    free_en = 0; #1;
    chk(empty, "empty after freeing all");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
