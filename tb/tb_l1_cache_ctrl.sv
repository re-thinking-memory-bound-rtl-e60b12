// tb_l1_cache_ctrl: one L1 controller (ID 0) on the shared way pool, backed
// by the L2 and a main-memory model. Random loads, stores and prefetches
// over 48 KB (much larger than the 8 ways x 16 sets x 64 B this controller
// owns) are checked against a shadow memory: a hit must return the latest
// value; a load miss waits for fill_done of its MSHR and retries. The run
// is repeated for 64 B, 128 B and 32 B virtual lines (flushing in between),
// and after a final flush every word is read back through the L2 to check
// that write-back and flush lost nothing. Counts hits, misses, MSHR merges,
// retries, write-backs and store-buffer merges.
`timescale 1ns/1ps
module tb_l1_cache_ctrl;
  import cgra_pkg::*;
  localparam int N_WAYS = 32, SETS = 16, MSHR_N = 16, TAG_W = 23;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0] line_m = 1;
  logic [3:0] perm [N_WAYS];
  logic req_valid = 0, req_port = 0;
  acc_e req_kind = ACC_LOAD;
  logic [31:0] req_addr = 0, req_wdata = 0;
  logic resp_hit, resp_miss, resp_retry, fill_done;
  logic [31:0] resp_rdata;
  logic [3:0] resp_mshr, fill_done_mshr;
  logic flush_start = 0, busy, mshr_empty, stat_access, stat_miss;
  logic [N_WAYS-1:0] flush_mask = '0;

  // controller <-> pool (controller 0 only; others idle)
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
  for (genvar c = 1; c < 4; c++) begin : g_idle
    assign lk_set[c] = '0; assign fl_set[c] = '0; assign wr_set[c] = '0; assign ww_set[c] = '0;
    assign t_set[c] = '0; assign wr_en[c] = 0; assign wr_vld[c] = 0; assign wr_dty[c] = 0;
    assign ww_en[c] = 0; assign t_en[c] = 0; assign wr_way[c] = '0; assign ww_way[c] = '0;
    assign t_way[c] = '0; assign wr_tag[c] = '0; assign wr_data[c] = '0; assign ww_word[c] = '0;
    assign ww_data[c] = '0;
  end

  l1_way_pool #(.N_WAYS(N_WAYS), .SETS(SETS), .N_CTRL(4), .TAG_W(TAG_W)) u_pool (
    .clk, .rst_n, .perm_we(1'b0), .perm_way('0), .perm_val('0), .perm,
    .lk_set, .fl_set, .wr_en, .wr_way, .wr_set, .wr_tag, .wr_vld, .wr_dty, .wr_data,
    .ww_en, .ww_way, .ww_set, .ww_word, .ww_data, .t_en, .t_way, .t_set,
    .lk_vld, .lk_tag, .lk_data, .fl_vld, .fl_dty, .fl_tag, .fl_age, .fl_data
  );

  logic l2_req_valid, l2_req_ready, l2_resp_valid, l2_resp_ready, wb_valid, wb_ready;
  logic [31:0] l2_req_addr, wb_addr;
  logic [3:0] l2_req_mshr, l2_resp_mshr;
  logic [L2_LINE_W-1:0] l2_resp_data;
  logic [PHYS_LINE_W-1:0] wb_data;

  l1_cache_ctrl #(.ID(0), .N_WAYS(N_WAYS), .SETS(SETS), .MSHR_N(MSHR_N)) dut (
    .clk, .rst_n, .line_m, .perm, .req_valid, .req_kind, .req_addr, .req_wdata, .req_port,
    .resp_hit, .resp_rdata, .resp_miss, .resp_retry, .resp_mshr, .fill_done, .fill_done_mshr,
    .l2_req_valid, .l2_req_addr, .l2_req_mshr, .l2_req_ready, .l2_resp_valid, .l2_resp_mshr,
    .l2_resp_data, .l2_resp_ready, .wb_valid, .wb_addr, .wb_data, .wb_ready,
    .flush_start, .flush_mask, .busy, .mshr_empty, .stat_access, .stat_miss,
    .lk_set(lk_set[0]), .fl_set(fl_set[0]), .wr_en(wr_en[0]), .wr_way(wr_way[0]), .wr_set(wr_set[0]),
    .wr_tag(wr_tag[0]), .wr_vld(wr_vld[0]), .wr_dty(wr_dty[0]), .wr_data(wr_data[0]),
    .ww_en(ww_en[0]), .ww_way(ww_way[0]), .ww_set(ww_set[0]), .ww_word(ww_word[0]), .ww_data(ww_data[0]),
    .t_en(t_en[0]), .t_way(t_way[0]), .t_set(t_set[0]),
    .lk_vld, .lk_tag, .lk_data, .fl_vld, .fl_dty, .fl_tag, .fl_age, .fl_data
  );

  // L2 with this controller on client 0
  logic rq_v [4], rq_r [4], wb_v [4], wb_r [4], rs_v [4], rs_r [4];
  logic [31:0] rq_a [4], wb_a [4];
  logic [3:0] rq_m [4];
  logic [PHYS_LINE_W-1:0] wb_d [4];
  logic [3:0] rs_m;
  logic [L2_LINE_W-1:0] rs_d;
  always_comb begin
    for (int c = 0; c < 4; c++) begin
      rq_v[c] = 0; rq_a[c] = 0; rq_m[c] = 0; wb_v[c] = 0; wb_a[c] = 0; wb_d[c] = 0; rs_r[c] = 1;
    end
    rq_v[0] = l2_req_valid; rq_a[0] = l2_req_addr; rq_m[0] = l2_req_mshr;
    wb_v[0] = wb_valid; wb_a[0] = wb_addr; wb_d[0] = wb_data; rs_r[0] = l2_resp_ready;
  end
  assign l2_req_ready = rq_r[0];
  assign wb_ready = wb_r[0];
  assign l2_resp_valid = rs_v[0];
  assign l2_resp_mshr = rs_m;
  assign l2_resp_data = rs_d;

  logic mrd_valid, mrd_ready, mrs_valid, mrs_ready, mwr_valid, mwr_ready, st_hit, st_miss;
  logic [31:0] mrd_addr, mwr_addr;
  logic [3:0] mrd_tag, mrs_tag;
  logic [L2_LINE_W-1:0] mrs_data, mwr_data;
  logic [PHYS_PER_L2-1:0] mwr_mask;
  int n_rd, n_wr;
  l2_cache u_l2 (
    .clk, .rst_n, .req_valid(rq_v), .req_addr(rq_a), .req_mshr(rq_m), .req_ready(rq_r),
    .wb_valid(wb_v), .wb_addr(wb_a), .wb_data(wb_d), .wb_ready(wb_r),
    .resp_valid(rs_v), .resp_mshr(rs_m), .resp_data(rs_d), .resp_ready(rs_r),
    .mrd_valid, .mrd_addr, .mrd_tag, .mrd_ready, .mrs_valid, .mrs_tag, .mrs_data, .mrs_ready,
    .mwr_valid, .mwr_addr, .mwr_data, .mwr_mask, .mwr_ready, .stat_hit(st_hit), .stat_miss(st_miss)
  );
  main_memory_model #(.LATENCY(40), .QW(4)) u_mem (
    .clk, .rst_n, .mrd_valid, .mrd_addr, .mrd_tag, .mrd_ready, .mrs_valid, .mrs_tag, .mrs_data,
    .mrs_ready, .mwr_valid, .mwr_addr, .mwr_data, .mwr_mask, .mwr_ready, .n_reads(n_rd), .n_writes(n_wr)
  );

  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_retry = 0, n_wb = 0, n_merge = 0, n_sbm = 0;
  logic [31:0] shadow [logic [31:0]];
  function automatic logic [31:0] sh(logic [31:0] a);
    return shadow.exists(a) ? shadow[a] : u_mem.init_word(a);
  endfunction
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask
  always @(posedge clk) if (rst_n) begin
    if (wb_valid && wb_ready) n_wb++;
    if (resp_miss && dut.ms_match) n_merge++;
    if (wr_en[0] && dut.cur_merged && dut.fst_q != 3'd4) n_sbm++;
  end

  // one access; loads retry until they hit
  task automatic access(acc_e k, logic [31:0] a, logic [31:0] d);
    bit fin;
    fin = 0;
    while (!fin) begin
      @(negedge clk);
      req_valid = 1; req_kind = k; req_addr = a; req_wdata = d;
      #1;
      if (resp_hit) begin
        n_hit++;
        if (k == ACC_LOAD) chk(resp_rdata == sh(a), $sformatf("load %h = %h expected %h", a, resp_rdata, sh(a)));
        if (k == ACC_STORE) shadow[a] = d;
        fin = 1;
      end else if (resp_miss) begin
        logic [3:0] m;
        n_miss++;
        m = resp_mshr;
        if (k == ACC_STORE) begin shadow[a] = d; fin = 1; end
        else if (k == ACC_PREFETCH) fin = 1;
        else begin
          @(negedge clk); req_valid = 0;
          while (!(fill_done && fill_done_mshr == m)) @(negedge clk);
        end
      end else begin
        n_retry++;
        @(negedge clk); req_valid = 0;
      end
    end
    @(negedge clk); req_valid = 0;
  endtask

  task automatic flush_all();
    @(negedge clk); flush_start = 1; flush_mask = '1;
    @(negedge clk); flush_start = 0;
    while (busy || !mshr_empty) @(negedge clk);
  endtask

  initial begin
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 3; pass++) begin
      line_m = (pass == 0) ? 2'd1 : (pass == 1) ? 2'd2 : 2'd0;
      for (int n = 0; n < 3000; n++) begin
        logic [31:0] a;
        int r;
        r = $urandom % 100;
        // mix of a hot 2 KB region (hits) and a 48 KB cold region (misses)
        a = (r < 50) ? 32'h0004_0000 + 4 * ($urandom % 512) : 32'h0004_0000 + 4 * ($urandom % 12288);
        r = $urandom % 10;
        if (r < 5) access(ACC_LOAD, a, 0);
        else if (r < 9) access(ACC_STORE, a, $urandom);
        else access(ACC_PREFETCH, a, 0);
      end
      while (!mshr_empty) @(negedge clk);
      flush_all();
    end
    // read back through the L2 path: every shadow word must come back
    line_m = 1;
    begin
      int nb;
      nb = 0;
      foreach (shadow[a]) begin
        if (nb < 1500) access(ACC_LOAD, a, 0);
        nb++;
      end
    end
    chk(n_hit > 0 && n_miss > 0 && n_retry > 0, $sformatf("hits %0d misses %0d retries %0d", n_hit, n_miss, n_retry));
    chk(n_wb > 0, $sformatf("write-backs %0d", n_wb));
    chk(n_merge > 0, $sformatf("MSHR merges %0d", n_merge));
    chk(n_sbm > 0, $sformatf("store-buffer merges %0d", n_sbm));
    $display("hits=%0d misses=%0d retries=%0d wb=%0d merges=%0d sbmerge=%0d", n_hit, n_miss, n_retry, n_wb, n_merge, n_sbm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (3_000_000) @(posedge clk); $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
