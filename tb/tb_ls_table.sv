// tb_ls_table: load/store table. Random allocations tagged with MSHR
// numbers and releases of whole MSHRs; checks the stored fields, the
// release mask and the full flag against a model.
//
// Timing: inputs change at the negative edge; the table updates on the rising
// edge and its outputs are compared one cycle later. Fields follow the paper's
// load/store table figure (Valid, MSHR Entry, Dest Reg, Type, Offset); the
// 16-entry size is an own choice.
`timescale 1ns/1ps
module tb_ls_table;
  import cgra_pkg::*;
  localparam int N = 16, MSHR_N = 16;
  logic clk = 0, rst_n = 0, alloc = 0, full, release_en = 0;
  logic [3:0] alloc_mshr = 0, alloc_dest = 0, release_mshr = 0;
  lst_type_e alloc_type = LST_LW;
  logic [6:0] alloc_off = 0;
  logic [N-1:0] rel_mask, e_valid;
  logic [3:0] e_dest [N];
  lst_type_e e_type [N];
  logic [6:0] e_off [N];
  int checks = 0, failures = 0, n_full = 0;
  bit m_v [N]; logic [3:0] m_m [N], m_d [N]; lst_type_e m_t [N]; logic [6:0] m_o [N];
  always #5 clk = ~clk;
  ls_table #(.N(N), .MSHR_N(MSHR_N)) dut (.*);
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    for (int i = 0; i < N; i++) m_v[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      int mf; bit mfull;
      @(negedge clk);
      mf = -1; mfull = 1;
      for (int i = N-1; i >= 0; i--) if (!m_v[i]) begin mf = i; mfull = 0; end
      alloc = !mfull && ($urandom % 3 != 0);
      alloc_mshr = 4'($urandom % 6); alloc_dest = 4'($urandom); alloc_type = lst_type_e'($urandom % 3);
      alloc_off = 7'($urandom);
      release_en = $urandom % 4 == 0; release_mshr = 4'($urandom % 6);
      #1;
      chk(full == mfull, "full");
      for (int i = 0; i < N; i++) begin
        chk(e_valid[i] == m_v[i], $sformatf("valid %0d", i));
        chk(rel_mask[i] == (m_v[i] && m_m[i] == release_mshr), $sformatf("release mask %0d", i));
        if (m_v[i]) chk(e_dest[i] == m_d[i] && e_type[i] == m_t[i] && e_off[i] == m_o[i], $sformatf("fields %0d", i));
      end
      if (mfull) n_full++;
      @(posedge clk);
      if (release_en) for (int i = 0; i < N; i++) if (m_v[i] && m_m[i] == release_mshr) m_v[i] = 0;
      if (alloc) begin m_v[mf] = 1; m_m[mf] = alloc_mshr; m_d[mf] = alloc_dest; m_t[mf] = alloc_type; m_o[mf] = alloc_off; end
    end
    chk(n_full > 0, "table became full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
