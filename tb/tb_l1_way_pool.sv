// tb_l1_way_pool: the pool of 32 L1 ways shared by four controllers.
// Checks reset ownership (8 ways each), that a controller can only write
// and see the ways whose permission register names it, line and word
// writes (word writes set dirty), LRU ages (touch clears the touched way
// and ages the other owned ways, saturating at 31), and that rewriting a
// permission register moves a way to another controller.
`timescale 1ns/1ps
module tb_l1_way_pool;
  import cgra_pkg::*;
  localparam int N_WAYS = 32, SETS = 16, TAG_W = 23;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic perm_we = 0; logic [4:0] perm_way = 0; logic [3:0] perm_val = 0;
  logic [3:0] perm [N_WAYS];
  logic [3:0] lk_set [4], fl_set [4], wr_set [4], ww_set [4], t_set [4];
  logic wr_en [4], wr_vld [4], wr_dty [4], ww_en [4], t_en [4];
  logic [4:0] wr_way [4], ww_way [4], t_way [4];
  logic [TAG_W-1:0] wr_tag [4];
  logic [PHYS_LINE_W-1:0] wr_data [4];
  logic [2:0] ww_word [4];
  logic [31:0] ww_data [4];
  logic lk_vld [N_WAYS], fl_vld [N_WAYS], fl_dty [N_WAYS];
  logic [TAG_W-1:0] lk_tag [N_WAYS], fl_tag [N_WAYS];
  logic [PHYS_LINE_W-1:0] lk_data [N_WAYS], fl_data [N_WAYS];
  logic [4:0] fl_age [N_WAYS];
  l1_way_pool #(.N_WAYS(N_WAYS), .SETS(SETS), .N_CTRL(4), .TAG_W(TAG_W)) dut (.*);

  int checks = 0, failures = 0;
  // model
  logic [3:0] m_perm [N_WAYS];
  bit m_v [N_WAYS][SETS], m_d [N_WAYS][SETS];
  logic [TAG_W-1:0] m_t [N_WAYS][SETS];
  logic [PHYS_LINE_W-1:0] m_dat [N_WAYS][SETS];
  int m_age [N_WAYS][SETS];
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask
  task automatic idle();
    for (int c = 0; c < 4; c++) begin
      lk_set[c] = 0; fl_set[c] = 0; wr_set[c] = 0; ww_set[c] = 0; t_set[c] = 0; wr_en[c] = 0; wr_vld[c] = 0;
      wr_dty[c] = 0; ww_en[c] = 0; t_en[c] = 0; wr_way[c] = 0; ww_way[c] = 0; t_way[c] = 0; wr_tag[c] = 0;
      wr_data[c] = 0; ww_word[c] = 0; ww_data[c] = 0;
    end
    perm_we = 0;
  endtask

  initial begin
    idle();
    for (int w = 0; w < N_WAYS; w++) begin
      m_perm[w] = 4'(w / 8);
      for (int s = 0; s < SETS; s++) begin m_v[w][s] = 0; m_d[w][s] = 0; m_t[w][s] = 0; m_age[w][s] = 0; m_dat[w][s] = 0; end
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    #1 for (int w = 0; w < N_WAYS; w++) chk(perm[w] == 4'(w / 8), "reset ownership");
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk); idle();
      for (int c = 0; c < 4; c++) begin
        lk_set[c] = 4'($urandom); fl_set[c] = 4'($urandom);
        wr_en[c] = $urandom % 3 == 0; wr_way[c] = 5'($urandom); wr_set[c] = 4'($urandom);
        wr_tag[c] = TAG_W'($urandom); wr_vld[c] = $urandom % 4 != 0; wr_dty[c] = $urandom % 2;
        for (int i = 0; i < 8; i++) wr_data[c][32*i +: 32] = $urandom;
        ww_en[c] = $urandom % 3 == 0; ww_way[c] = 5'($urandom); ww_set[c] = 4'($urandom);
        ww_word[c] = 3'($urandom); ww_data[c] = $urandom;
        if (ww_en[c] && wr_en[c] && ww_way[c] == wr_way[c] && ww_set[c] == wr_set[c]) ww_en[c] = 0;
        t_en[c] = $urandom % 3 == 0; t_way[c] = 5'($urandom); t_set[c] = 4'($urandom);
      end
      if (n % 50 == 49) begin perm_we = 1; perm_way = 5'($urandom); perm_val = ($urandom % 5 == 4) ? 4'hF : 4'($urandom % 4); end
      #1;
      for (int w = 0; w < N_WAYS; w++) begin
        bit own; int c;
        own = m_perm[w] < 4;
        c = own ? m_perm[w] : 0;
        chk(perm[w] == m_perm[w], "perm readback");
        chk(lk_vld[w] == (own && m_v[w][lk_set[c]]), $sformatf("lookup valid w%0d", w));
        if (own && m_v[w][lk_set[c]]) chk(lk_tag[w] == m_t[w][lk_set[c]] && lk_data[w] == m_dat[w][lk_set[c]], "lookup tag/data");
        chk(fl_vld[w] == (own && m_v[w][fl_set[c]]), "fill-port valid");
        if (own && m_v[w][fl_set[c]]) chk(fl_dty[w] == m_d[w][fl_set[c]] && fl_tag[w] == m_t[w][fl_set[c]], "fill-port tag/dirty");
        if (own) chk(fl_age[w] == 5'(m_age[w][fl_set[c]]), $sformatf("age w%0d", w));
      end
      @(posedge clk);
      for (int w = 0; w < N_WAYS; w++) if (m_perm[w] < 4) begin
        int c;
        c = m_perm[w];
        if (wr_en[c] && wr_way[c] == 5'(w)) begin
          m_v[w][wr_set[c]] = wr_vld[c]; m_d[w][wr_set[c]] = wr_dty[c]; m_t[w][wr_set[c]] = wr_tag[c];
          m_dat[w][wr_set[c]] = wr_data[c];
        end
        if (ww_en[c] && ww_way[c] == 5'(w)) begin
          m_dat[w][ww_set[c]][32*ww_word[c] +: 32] = ww_data[c]; m_d[w][ww_set[c]] = 1;
        end
        if (t_en[c]) begin
          if (t_way[c] == 5'(w)) m_age[w][t_set[c]] = 0;
          else if (m_age[w][t_set[c]] < 31) m_age[w][t_set[c]]++;
        end
      end
      if (perm_we) m_perm[perm_way] = perm_val;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
