// cgra_top: an 8x8 CGRA with a cache-integrated, multi-cache memory
// subsystem, runahead execution and cache reconfiguration.
//
// Structure (paper Fig. 3a(6) and its reconfiguration figure):
//   * cgra_array: ROWS x COLS PEs; the ROWS left-column PEs access memory.
//   * N_X = ROWS/2 memory crossbars (mem_xbar), each shared by two adjacent
//     left-column PEs, each with its own SPM and runahead temporary store;
//   * N_X L1 controllers (l1_cache_ctrl), one per crossbar, over one pool of
//     N_WAYS ways whose permission registers assign ways to controllers
//     (l1_way_pool) - crossbar + SPM + L1 share = one virtual SPM;
//   * one shared L2 (l2_cache) in front of main memory (external, ports);
//   * runahead_ctrl (normal/runahead state, save/restore of all PE state);
//   * miss_monitor -> access_tracker -> interrupt, and reconfig_ctrl that
//     applies the software's decision from the reconfiguration registers;
//   * mmio_regs: the host's register interface.
//
// Execution: the host loads configuration words and SPM data through MMIO,
// sets CTX_LEN and ITER_LIMIT and sets CTRL.run. The array then fires once
// per cycle in which every crossbar has completed the requests of the
// current context; otherwise it stalls. `done` (STAT 11 bit 0) rises when
// ITER_LIMIT fires have happened. The fire counter is saved and restored
// with the PE state, so runahead does not count as progress.
//
// STAT registers (MMIO 0x100 + 4i):
//   0 fires  1 cycles while running  2 stall cycles  3 runahead entries
//   4 runahead cycles  5 L1 misses  6 L1 accesses  7 crossbar contention
//   cycles  8 misses in the last monitor window  9 L2 hits  10 L2 misses
//   11 {reconfig busy, tracker irq, runahead mode, done}  12 tracker triggers
//   13 reconfigurations applied  14 restores  15 cycles stalled on a miss
//   with runahead off
//
// Main memory interface (external, see l2_cache): mrd_* line read requests
// tagged by L2 table entry, mrs_* tagged line responses in any order, mwr_*
// line writes with a 32 B segment mask.
//
// Lint notes: `ctx` (the array's current context) is only brought out for
// observation in simulation and is otherwise unused. rst_n is reported as both
// synchronous and asynchronous because the PE assertions use it in
// `disable iff`; every flip-flop uses it as an asynchronous reset.
module cgra_top
  import cgra_pkg::*;
#(
  parameter int ROWS       = 8,
  parameter int COLS       = 8,
  parameter int N_CTX      = 8,
  parameter int SPM_BYTES  = 2048,
  parameter int TS_N       = 16,
  parameter int N_WAYS     = 32,
  parameter int L1_SETS    = 16,
  parameter int MSHR_N     = 16,
  parameter int LST_N      = 16,
  parameter int SB_N       = 8,
  parameter int L2_BYTES   = 128 * 1024,
  parameter int L2_WAYS    = 8,
  parameter int L2_HIT_LAT = 8,
  parameter int L2_Q       = 16,
  parameter int TRK_DEPTH  = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // host bus
  input  logic                    bus_valid,
  input  logic                    bus_we,
  input  logic [19:0]             bus_addr,
  input  logic [31:0]             bus_wdata,
  output logic [31:0]             bus_rdata,
  output logic                    irq,
  // main memory
  output logic                    mrd_valid,
  output logic [31:0]             mrd_addr,
  output logic [$clog2(L2_Q)-1:0] mrd_tag,
  input  logic                    mrd_ready,
  input  logic                    mrs_valid,
  input  logic [$clog2(L2_Q)-1:0] mrs_tag,
  input  logic [L2_LINE_W-1:0]    mrs_data,
  output logic                    mrs_ready,
  output logic                    mwr_valid,
  output logic [31:0]             mwr_addr,
  output logic [L2_LINE_W-1:0]    mwr_data,
  output logic [PHYS_PER_L2-1:0]  mwr_mask,
  input  logic                    mwr_ready
);
  localparam int N_X    = ROWS / 2;
  localparam int MW     = $clog2(MSHR_N);
  localparam int SW     = $clog2(L1_SETS);
  localparam int TAG_W  = 32 - 5 - SW;
  localparam int WW     = $clog2(N_WAYS);
  localparam int N_STAT = 16;

  // ------------------------------------------------------------ host registers
  logic                   run, ra_en, mon_en, apply, irq_clr, restart;
  logic [$clog2(N_CTX):0] ctx_len;
  logic [31:0]            iter_limit, tr, mon_win, trk_win;
  logic [3:0]             rr_perm [N_WAYS];
  logic [1:0]             rr_m    [N_X];
  logic                   cfg_we;
  logic [$clog2(ROWS*COLS)-1:0] cfg_pe;
  logic [$clog2(N_CTX)-1:0] cfg_ctx;
  cfg_word_t              cfg_word;
  logic                   spm_we [N_X];
  logic [$clog2(SPM_BYTES/4)-1:0] spm_addr;
  logic [31:0]            spm_wdata;
  logic [31:0]            spm_rdata [N_X];
  logic [31:0]            stat [N_STAT];
  logic [3:0]             perm [N_WAYS];
  logic [$clog2(ROWS)-1:0] trk_pe;
  logic [$clog2(TRK_DEPTH)-1:0] trk_idx;
  logic [31:0]            trk_addr;
  logic [15:0]            trk_time;
  logic [$clog2(TRK_DEPTH):0] trk_cnt [ROWS];

  mmio_regs #(.N_WAYS(N_WAYS), .N_CTRL(N_X), .N_MPE(ROWS), .N_PE(ROWS*COLS), .N_CTX(N_CTX),
              .TRK_DEPTH(TRK_DEPTH), .N_STAT(N_STAT), .SPM_BYTES(SPM_BYTES)) u_mmio (
    .clk, .rst_n, .bus_valid, .bus_we, .bus_addr, .bus_wdata, .bus_rdata,
    .run, .ra_en, .mon_en, .apply, .irq_clr, .restart, .ctx_len, .iter_limit, .tr, .mon_win,
    .trk_win, .rr_perm, .rr_m, .cfg_we, .cfg_pe, .cfg_ctx, .cfg_word, .spm_we, .spm_addr,
    .spm_wdata, .spm_rdata, .stat, .perm, .trk_pe, .trk_idx, .trk_addr, .trk_time, .trk_cnt
  );

  // ------------------------------------------------------------ array and run control
  logic       fire, save, restore, enter_ra, ra_mode, hold, done;
  logic [$clog2(N_CTX)-1:0] ctx;
  mem_req_t   mreq  [ROWS];
  word_t      mrdat [ROWS];
  logic       xb_done [N_X];
  logic       all_done;
  logic [31:0] fires_q, fires_bk_q;

  always_comb begin
    all_done = 1'b1;
    for (int x = 0; x < N_X; x++) all_done &= xb_done[x];
  end
  // the iteration limit stops firing; the kernel is done once the limit is
  // reached in normal mode (runahead may reach it first and then waits)
  logic at_limit, mem_active;
  assign at_limit   = (fires_q >= iter_limit);
  assign done       = at_limit && !ra_mode;
  assign fire       = run && !at_limit && all_done && !hold && !restore;
  assign mem_active = run && !at_limit && !hold;

  cgra_array #(.ROWS(ROWS), .COLS(COLS), .N_CTX(N_CTX)) u_array (
    .clk, .rst_n, .fire, .save, .restore, .ctx_len, .ctx,
    .cfg_we, .cfg_pe, .cfg_ctx, .cfg_word, .mem_req(mreq), .mem_rdata(mrdat)
  );

  // ------------------------------------------------------------ crossbars and L1s
  logic       wait_any [N_X];
  logic [MW-1:0] wait_mshr [N_X];
  logic       contention [N_X];
  logic       l1_req_valid [N_X], l1_req_port [N_X];
  acc_e       l1_req_kind [N_X];
  logic [31:0] l1_req_addr [N_X], l1_req_wdata [N_X], l1_rdata [N_X];
  logic       l1_hit [N_X], l1_miss [N_X], l1_retry [N_X];
  logic [MW-1:0] l1_mshr [N_X];
  logic       fill_done [N_X];
  logic [MW-1:0] fill_mshr [N_X];
  logic       l2_req_valid [N_X], l2_req_ready [N_X], l2_resp_valid [N_X], l2_resp_ready [N_X];
  logic [31:0] l2_req_addr [N_X];
  logic [MW-1:0] l2_req_mshr [N_X];
  logic [MW-1:0] l2_resp_mshr;
  logic [L2_LINE_W-1:0] l2_resp_data;
  logic       wb_valid [N_X], wb_ready [N_X];
  logic [31:0] wb_addr [N_X];
  logic [PHYS_LINE_W-1:0] wb_data [N_X];
  logic       flush_start [N_X];
  logic [N_WAYS-1:0] flush_mask [N_X];
  logic       l1_busy [N_X], l1_mshr_empty [N_X], l1_idle [N_X];
  logic [N_X-1:0] st_acc, st_miss;
  logic [1:0] line_m [N_X];

  // pool ports
  logic [SW-1:0]  p_lk_set [N_X], p_fl_set [N_X], p_wr_set [N_X], p_ww_set [N_X], p_t_set [N_X];
  logic           p_wr_en [N_X], p_wr_vld [N_X], p_wr_dty [N_X], p_ww_en [N_X], p_t_en [N_X];
  logic [WW-1:0]  p_wr_way [N_X], p_ww_way [N_X], p_t_way [N_X];
  logic [TAG_W-1:0] p_wr_tag [N_X];
  logic [PHYS_LINE_W-1:0] p_wr_data [N_X];
  logic [2:0]     p_ww_word [N_X];
  logic [31:0]    p_ww_data [N_X];
  logic           lk_vld [N_WAYS], fl_vld [N_WAYS], fl_dty [N_WAYS];
  logic [TAG_W-1:0] lk_tag [N_WAYS], fl_tag [N_WAYS];
  logic [PHYS_LINE_W-1:0] lk_data [N_WAYS], fl_data [N_WAYS];
  logic [4:0]     fl_age [N_WAYS];
  logic           perm_we;
  logic [WW-1:0]  perm_way;
  logic [3:0]     perm_val;

  for (genvar x = 0; x < N_X; x++) begin : g_vspm
    mem_req_t xreq [2];
    word_t    xrd  [2];
    // requests reach the memory side only while the array is running and
    // no reconfiguration holds it (keeps stale results out of the crossbar)
    always_comb begin
      xreq[0] = mreq[2*x];
      xreq[1] = mreq[2*x+1];
      xreq[0].valid = mreq[2*x].valid && mem_active;
      xreq[1].valid = mreq[2*x+1].valid && mem_active;
    end
    assign mrdat[2*x]   = xrd[0];
    assign mrdat[2*x+1] = xrd[1];

    mem_xbar #(.SPM_BYTES(SPM_BYTES), .TS_N(TS_N), .MSHR_N(MSHR_N)) u_xbar (
      .clk, .rst_n, .ra_mode, .enter_ra, .restore, .fire, .req(xreq), .rdata(xrd),
      .all_done(xb_done[x]), .wait_any(wait_any[x]), .wait_mshr(wait_mshr[x]),
      .contention(contention[x]),
      .host_we(spm_we[x]), .host_addr(spm_addr), .host_wdata(spm_wdata),
      .host_rdata(spm_rdata[x]),
      .l1_req_valid(l1_req_valid[x]), .l1_req_kind(l1_req_kind[x]), .l1_req_addr(l1_req_addr[x]),
      .l1_req_wdata(l1_req_wdata[x]), .l1_req_port(l1_req_port[x]),
      .l1_hit(l1_hit[x]), .l1_rdata(l1_rdata[x]), .l1_miss(l1_miss[x]), .l1_retry(l1_retry[x]),
      .l1_mshr(l1_mshr[x]), .l1_fill_done(fill_done[x]), .l1_fill_mshr(fill_mshr[x])
    );

    l1_cache_ctrl #(.ID(x), .N_WAYS(N_WAYS), .SETS(L1_SETS), .MSHR_N(MSHR_N), .LST_N(LST_N),
                    .SB_N(SB_N)) u_l1 (
      .clk, .rst_n, .line_m(line_m[x]), .perm,
      .req_valid(l1_req_valid[x]), .req_kind(l1_req_kind[x]), .req_addr(l1_req_addr[x]),
      .req_wdata(l1_req_wdata[x]), .req_port(l1_req_port[x]),
      .resp_hit(l1_hit[x]), .resp_rdata(l1_rdata[x]), .resp_miss(l1_miss[x]),
      .resp_retry(l1_retry[x]), .resp_mshr(l1_mshr[x]),
      .fill_done(fill_done[x]), .fill_done_mshr(fill_mshr[x]),
      .l2_req_valid(l2_req_valid[x]), .l2_req_addr(l2_req_addr[x]), .l2_req_mshr(l2_req_mshr[x]),
      .l2_req_ready(l2_req_ready[x]), .l2_resp_valid(l2_resp_valid[x]),
      .l2_resp_mshr(l2_resp_mshr), .l2_resp_data(l2_resp_data), .l2_resp_ready(l2_resp_ready[x]),
      .wb_valid(wb_valid[x]), .wb_addr(wb_addr[x]), .wb_data(wb_data[x]), .wb_ready(wb_ready[x]),
      .flush_start(flush_start[x]), .flush_mask(flush_mask[x]), .busy(l1_busy[x]),
      .mshr_empty(l1_mshr_empty[x]), .stat_access(st_acc[x]), .stat_miss(st_miss[x]),
      .lk_set(p_lk_set[x]), .fl_set(p_fl_set[x]), .wr_en(p_wr_en[x]), .wr_way(p_wr_way[x]),
      .wr_set(p_wr_set[x]), .wr_tag(p_wr_tag[x]), .wr_vld(p_wr_vld[x]), .wr_dty(p_wr_dty[x]),
      .wr_data(p_wr_data[x]), .ww_en(p_ww_en[x]), .ww_way(p_ww_way[x]), .ww_set(p_ww_set[x]),
      .ww_word(p_ww_word[x]), .ww_data(p_ww_data[x]), .t_en(p_t_en[x]), .t_way(p_t_way[x]),
      .t_set(p_t_set[x]), .lk_vld, .lk_tag, .lk_data, .fl_vld, .fl_dty, .fl_tag, .fl_age, .fl_data
    );
    assign l1_idle[x] = l1_mshr_empty[x] && !l1_busy[x];
  end

  l1_way_pool #(.N_WAYS(N_WAYS), .SETS(L1_SETS), .N_CTRL(N_X), .TAG_W(TAG_W)) u_pool (
    .clk, .rst_n, .perm_we, .perm_way, .perm_val, .perm,
    .lk_set(p_lk_set), .fl_set(p_fl_set), .wr_en(p_wr_en), .wr_way(p_wr_way), .wr_set(p_wr_set),
    .wr_tag(p_wr_tag), .wr_vld(p_wr_vld), .wr_dty(p_wr_dty), .wr_data(p_wr_data),
    .ww_en(p_ww_en), .ww_way(p_ww_way), .ww_set(p_ww_set), .ww_word(p_ww_word),
    .ww_data(p_ww_data), .t_en(p_t_en), .t_way(p_t_way), .t_set(p_t_set),
    .lk_vld, .lk_tag, .lk_data, .fl_vld, .fl_dty, .fl_tag, .fl_age, .fl_data
  );

  logic l2_hit, l2_miss;
  l2_cache #(.N_CLIENT(N_X), .BYTES(L2_BYTES), .WAYS(L2_WAYS), .HIT_LAT(L2_HIT_LAT), .Q(L2_Q),
             .MSHR_N(MSHR_N)) u_l2 (
    .clk, .rst_n,
    .req_valid(l2_req_valid), .req_addr(l2_req_addr), .req_mshr(l2_req_mshr), .req_ready(l2_req_ready),
    .wb_valid, .wb_addr, .wb_data, .wb_ready,
    .resp_valid(l2_resp_valid), .resp_mshr(l2_resp_mshr), .resp_data(l2_resp_data),
    .resp_ready(l2_resp_ready),
    .mrd_valid, .mrd_addr, .mrd_tag, .mrd_ready, .mrs_valid, .mrs_tag, .mrs_data, .mrs_ready,
    .mwr_valid, .mwr_addr, .mwr_data, .mwr_mask, .mwr_ready, .stat_hit(l2_hit), .stat_miss(l2_miss)
  );

  // ------------------------------------------------------------ runahead
  logic [31:0] ra_entries, ra_cycles;
  runahead_ctrl #(.N_X(N_X), .MSHR_N(MSHR_N)) u_ra (
    .clk, .rst_n, .ra_en, .hold, .wait_any, .wait_mshr, .fill_done, .fill_mshr,
    .ra_mode, .save, .enter_ra, .restore, .n_entries(ra_entries), .n_ra_cycles(ra_cycles)
  );

  // ------------------------------------------------------------ monitor, tracker, reconfiguration
  logic        trigger, trk_active, trk_irq;
  logic [31:0] last_misses;
  miss_monitor #(.N_SRC(N_X)) u_mon (
    .clk, .rst_n, .enable(mon_en && !trk_active && !trk_irq), .threshold(tr), .window(mon_win),
    .miss(st_miss), .trigger, .last_misses
  );

  logic [ROWS-1:0] acc_valid;
  logic [31:0]     acc_addr [ROWS];
  always_comb
    for (int r = 0; r < ROWS; r++) begin
      acc_valid[r] = fire && !ra_mode && mreq[r].valid;
      acc_addr[r]  = mreq[r].addr;
    end

  access_tracker #(.N_PE(ROWS), .DEPTH(TRK_DEPTH)) u_trk (
    .clk, .rst_n, .trigger, .window(trk_win), .acc_valid, .acc_addr, .active(trk_active),
    .irq(trk_irq), .irq_clr, .rd_pe(trk_pe), .rd_idx(trk_idx), .rd_addr(trk_addr),
    .rd_time(trk_time), .count(trk_cnt)
  );
  assign irq = trk_irq;

  logic rc_busy;
  reconfig_ctrl #(.N_WAYS(N_WAYS), .N_CTRL(N_X)) u_rc (
    .clk, .rst_n, .apply, .rr_perm, .rr_m, .perm, .ra_mode, .l1_idle, .hold, .busy(rc_busy),
    .flush_start, .flush_mask, .perm_we, .perm_way, .perm_val, .line_m
  );

  // ------------------------------------------------------------ counters
  logic [31:0] cnt_q [N_STAT];
  logic        any_wait, any_cont, rc_busy_q;
  always_comb begin
    any_wait = 1'b0;
    any_cont = 1'b0;
    for (int x = 0; x < N_X; x++) begin
      any_wait |= wait_any[x];
      any_cont |= contention[x];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fires_q    <= '0;
      fires_bk_q <= '0;
      rc_busy_q  <= 1'b0;
      for (int i = 0; i < N_STAT; i++) cnt_q[i] <= '0;
    end else begin
      rc_busy_q <= rc_busy;
      if (restart) begin
        fires_q <= '0;
        for (int i = 0; i < N_STAT; i++) cnt_q[i] <= '0;
      end else begin
        if (restore)   fires_q <= fires_bk_q;
        else if (fire) fires_q <= fires_q + 1;
        if (save) fires_bk_q <= fires_q;
        if (run && !done)                   cnt_q[1]  <= cnt_q[1] + 1;
        if (run && !done && !fire)          cnt_q[2]  <= cnt_q[2] + 1;
        cnt_q[5] <= cnt_q[5] + 32'($countones(st_miss));
        cnt_q[6] <= cnt_q[6] + 32'($countones(st_acc));
        if (any_cont)                       cnt_q[7]  <= cnt_q[7] + 1;
        if (l2_hit)                         cnt_q[9]  <= cnt_q[9] + 1;
        if (l2_miss)                        cnt_q[10] <= cnt_q[10] + 1;
        if (trigger)                        cnt_q[12] <= cnt_q[12] + 1;
        if (rc_busy_q && !rc_busy)          cnt_q[13] <= cnt_q[13] + 1;
        if (restore)                        cnt_q[14] <= cnt_q[14] + 1;
        if (run && !done && any_wait && !ra_mode) cnt_q[15] <= cnt_q[15] + 1;
      end
    end
  end

  always_comb begin
    stat     = cnt_q;
    stat[0]  = fires_q;
    stat[3]  = ra_entries;
    stat[4]  = ra_cycles;
    stat[8]  = last_misses;
    stat[11] = {28'd0, rc_busy, trk_irq, ra_mode, done};
  end
endmodule
