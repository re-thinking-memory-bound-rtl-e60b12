// l1_cache_ctrl: non-blocking L1 cache controller of one virtual SPM
// ("CacheCtrl" in the paper's memory-subsystem figure).
//
// It serves one request per cycle from its memory crossbar, looking up only
// the ways of the shared pool whose permission register names this
// controller (ID). Hit latency is one cycle: the response (hit / miss taken /
// retry) is combinational and the crossbar registers it.
//
// Policies taken from the paper: non-blocking with MSHRs and a Load/Store
// Table, LRU replacement, write-allocate, virtual cache lines of 2^m physical
// lines with replacement on the virtual line and LRU kept on the first
// physical set of the virtual set (the representative set), hits served at
// physical-line granularity, and a counter that walks the physical lines of a
// virtual line during a refill. Choices of this design: write-back with
// dirty bits, 32 B physical lines (virtual lines of 32/64/128 B, m = 0..2),
// requests that cannot be taken (structures full, or a miss on the line that
// is being refilled) answered with `retry`, and read misses that do not
// return data: the crossbar waits for `fill_done` of its MSHR and asks again.
//
//   LOAD     hit: data.  miss: MSHR (new or merged) + LST entry (LW, Dest Reg =
//            requesting port); answer miss with the MSHR index.
//   STORE    hit: word written, line dirty.  miss: data to the store buffer,
//            LST entry (SW, Dest Reg = buffer index), MSHR; the store is done.
//   PREFETCH hit: nothing.  miss: MSHR only (runahead reads and stores
//            converted to reads).
//
// Refill: the L2 answers with the whole 128 B L2 line holding the virtual
// line. The fill engine picks the victim way (an invalid owned way first,
// else the largest LRU age in the representative set), then writes one
// physical line per cycle, first writing back a dirty old line to the L2 and
// merging buffered store words of this MSHR. It then releases the LST and
// store-buffer entries, frees the MSHR and pulses fill_done.
//
// Flush (used by reconfiguration before a way changes owner): writes back
// every dirty line of the ways in flush_mask and invalidates them.
//
// Lint note: the load/store table's valid and offset outputs and the store
// buffer's lookup index are unused. Loads retry after the fill instead of
// being answered from the table, and store data is merged by address.
// rst_n is reported as both synchronous and asynchronous only because an
// assertion uses it in `disable iff`; all flip-flops reset asynchronously.
module l1_cache_ctrl
  import cgra_pkg::*;
#(
  parameter int ID     = 0,
  parameter int N_WAYS = 32,
  parameter int SETS   = 16,
  parameter int MSHR_N = 16,
  parameter int LST_N  = 16,
  parameter int SB_N   = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [1:0]                line_m,      // virtual line = 2^m physical lines
  input  logic [3:0]                perm [N_WAYS],
  // crossbar request
  input  logic                      req_valid,
  input  acc_e                      req_kind,
  input  logic [31:0]               req_addr,
  input  logic [31:0]               req_wdata,
  input  logic                      req_port,
  output logic                      resp_hit,
  output logic [31:0]               resp_rdata,
  output logic                      resp_miss,
  output logic                      resp_retry,
  output logic [$clog2(MSHR_N)-1:0] resp_mshr,
  output logic                      fill_done,
  output logic [$clog2(MSHR_N)-1:0] fill_done_mshr,
  // to L2
  output logic                      l2_req_valid,
  output logic [31:0]               l2_req_addr,
  output logic [$clog2(MSHR_N)-1:0] l2_req_mshr,
  input  logic                      l2_req_ready,
  input  logic                      l2_resp_valid,
  input  logic [$clog2(MSHR_N)-1:0] l2_resp_mshr,
  input  logic [L2_LINE_W-1:0]      l2_resp_data,
  output logic                      l2_resp_ready,
  output logic                      wb_valid,
  output logic [31:0]               wb_addr,
  output logic [PHYS_LINE_W-1:0]    wb_data,
  input  logic                      wb_ready,
  // flush
  input  logic                      flush_start,
  input  logic [N_WAYS-1:0]         flush_mask,
  output logic                      busy,
  output logic                      mshr_empty,
  // statistics
  output logic                      stat_access,
  output logic                      stat_miss,
  // way pool
  output logic [$clog2(SETS)-1:0]   lk_set,
  output logic [$clog2(SETS)-1:0]   fl_set,
  output logic                      wr_en,
  output logic [$clog2(N_WAYS)-1:0] wr_way,
  output logic [$clog2(SETS)-1:0]   wr_set,
  output logic [31-5-$clog2(SETS):0] wr_tag,
  output logic                      wr_vld,
  output logic                      wr_dty,
  output logic [PHYS_LINE_W-1:0]    wr_data,
  output logic                      ww_en,
  output logic [$clog2(N_WAYS)-1:0] ww_way,
  output logic [$clog2(SETS)-1:0]   ww_set,
  output logic [2:0]                ww_word,
  output logic [31:0]               ww_data,
  output logic                      t_en,
  output logic [$clog2(N_WAYS)-1:0] t_way,
  output logic [$clog2(SETS)-1:0]   t_set,
  input  logic                      lk_vld [N_WAYS],
  input  logic [31-5-$clog2(SETS):0] lk_tag [N_WAYS],
  input  logic [PHYS_LINE_W-1:0]    lk_data[N_WAYS],
  input  logic                      fl_vld [N_WAYS],
  input  logic                      fl_dty [N_WAYS],
  input  logic [31-5-$clog2(SETS):0] fl_tag [N_WAYS],
  input  logic [4:0]                fl_age [N_WAYS],
  input  logic [PHYS_LINE_W-1:0]    fl_data[N_WAYS]
);
  localparam int SW    = $clog2(SETS);
  localparam int TAG_W = 32 - 5 - SW;
  localparam int WW    = $clog2(N_WAYS);
  localparam int MW    = $clog2(MSHR_N);
  localparam int SBW   = $clog2(SB_N);
  localparam int BLK_W = 27;

  // ------------------------------------------------------------ owned ways
  logic [N_WAYS-1:0] owned;
  always_comb for (int w = 0; w < N_WAYS; w++) owned[w] = (perm[w] == 4'(ID));

  // ------------------------------------------------------------ sub-blocks
  logic             ms_match, ms_full, ms_alloc, ms_iss_valid, ms_iss_ack, ms_free, ms_empty;
  logic [MW-1:0]    ms_idx, ms_free_idx, ms_iss_idx, ms_free_in;
  logic [BLK_W-1:0] ms_lk_blk, ms_iss_blk;
  logic [BLK_W-1:0] ms_blk_of [MSHR_N];

  mshr_file #(.N(MSHR_N), .BLK_W(BLK_W)) u_mshr (
    .clk, .rst_n, .lk_blk(ms_lk_blk), .lk_match(ms_match), .lk_idx(ms_idx),
    .alloc(ms_alloc), .alloc_blk(ms_lk_blk), .full(ms_full), .free_idx(ms_free_idx),
    .iss_valid(ms_iss_valid), .iss_idx(ms_iss_idx), .iss_blk(ms_iss_blk), .iss_ack(ms_iss_ack),
    .free_en(ms_free), .free_idx_in(ms_free_in), .empty(ms_empty), .blk_of(ms_blk_of)
  );
  assign mshr_empty = ms_empty;

  logic              lst_alloc, lst_full, lst_rel;
  logic [MW-1:0]     lst_alloc_mshr;
  logic [3:0]        lst_alloc_dest;
  lst_type_e         lst_alloc_type;
  logic [LST_N-1:0]  lst_rel_mask, lst_valid;
  logic [3:0]        lst_dest [LST_N];
  lst_type_e         lst_type [LST_N];
  logic [6:0]        lst_off  [LST_N];
  logic [MW-1:0]     fill_mshr_q;

  ls_table #(.N(LST_N), .MSHR_N(MSHR_N)) u_lst (
    .clk, .rst_n, .alloc(lst_alloc), .alloc_mshr(lst_alloc_mshr), .alloc_dest(lst_alloc_dest),
    .alloc_type(lst_alloc_type), .alloc_off(req_addr[6:0]), .full(lst_full),
    .release_en(lst_rel), .release_mshr(fill_mshr_q), .rel_mask(lst_rel_mask),
    .e_valid(lst_valid), .e_dest(lst_dest), .e_type(lst_type), .e_off(lst_off)
  );

  logic             sb_hit, sb_full, sb_wr;
  logic [SBW-1:0]   sb_idx, sb_alloc_idx;
  logic [SB_N-1:0]  sb_free, sb_valid;
  logic [31:0]      sb_addr [SB_N];
  logic [31:0]      sb_data [SB_N];

  store_buffer #(.N(SB_N)) u_sb (
    .clk, .rst_n, .lk_addr(req_addr), .lk_hit(sb_hit), .lk_idx(sb_idx),
    .wr_en(sb_wr), .wr_addr(req_addr), .wr_data(req_wdata), .alloc_idx(sb_alloc_idx),
    .full(sb_full), .free_mask(sb_free), .e_valid(sb_valid), .e_addr(sb_addr), .e_data(sb_data)
  );

  // ------------------------------------------------------------ fill / flush engine
  typedef enum logic [2:0] {F_IDLE, F_VICTIM, F_WRITE, F_DONE, F_FLUSH} fstate_e;
  fstate_e              fst_q;
  logic [L2_LINE_W-1:0] fbuf_q;
  logic [BLK_W-1:0]     fblk_q;      // block address of line 0 of the virtual line
  logic [1:0]           fk_q;        // physical line counter
  logic [1:0]           fm_q;        // line_m latched for this refill
  logic [WW-1:0]        fway_q;
  logic [N_WAYS-1:0]    flmask_q;
  logic [SW-1:0]        flset_q;
  logic [WW-1:0]        flway_q;

  logic [BLK_W-1:0]       cur_blk;
  logic [SW-1:0]          cur_set;
  logic [PHYS_LINE_W-1:0] cur_line;
  logic                   cur_merged;

  // ------------------------------------------------------------ request decode
  logic [SW-1:0]    r_set;
  logic [TAG_W-1:0] r_tag;
  logic [2:0]       r_word;
  logic [BLK_W-1:0] r_vblk;
  assign r_set  = req_addr[5 +: SW];
  assign r_tag  = req_addr[31 -: TAG_W];
  assign r_word = req_addr[4:2];
  always_comb begin
    r_vblk = req_addr[31:5];
    for (int b = 0; b < MAX_M; b++) if (b < int'(line_m)) r_vblk[b] = 1'b0;
  end
  assign lk_set    = r_set;
  assign ms_lk_blk = r_vblk;

  logic [N_WAYS-1:0] hit_vec;
  logic              hit;
  logic [WW-1:0]     hit_way;
  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int w = 0; w < N_WAYS; w++) begin
      hit_vec[w] = owned[w] && lk_vld[w] && lk_tag[w] == r_tag;
      if (hit_vec[w]) begin
        hit     = 1'b1;
        hit_way = WW'(w);
      end
    end
  end

  logic filling_this;  // request misses on the virtual line being refilled now
  assign filling_this = (fst_q != F_IDLE) && (fst_q != F_FLUSH) && ms_match && (ms_idx == fill_mshr_q);

  always_comb begin
    resp_hit       = 1'b0;
    resp_miss      = 1'b0;
    resp_retry     = 1'b0;
    resp_rdata     = lk_data[hit_way][r_word*32 +: 32];
    resp_mshr      = ms_match ? ms_idx : ms_free_idx;
    ms_alloc       = 1'b0;
    lst_alloc      = 1'b0;
    lst_alloc_mshr = resp_mshr;
    lst_alloc_dest = {3'd0, req_port};
    lst_alloc_type = LST_LW;
    sb_wr          = 1'b0;
    ww_en          = 1'b0;
    ww_way         = hit_way;
    ww_set         = r_set;
    ww_word        = r_word;
    ww_data        = req_wdata;
    stat_access    = 1'b0;
    stat_miss      = 1'b0;
    if (req_valid) begin
      if (fst_q == F_FLUSH) begin
        resp_retry = 1'b1;
      end else if (hit && req_kind == ACC_STORE && fst_q == F_WRITE &&
                   hit_way == fway_q && r_set == cur_set) begin
        resp_retry = 1'b1;   // line is being replaced this cycle
      end else if (hit) begin
        resp_hit    = 1'b1;
        stat_access = 1'b1;
        if (req_kind == ACC_STORE) ww_en = 1'b1;
      end else if (filling_this) begin
        resp_retry = 1'b1;
      end else begin
        unique case (req_kind)
          ACC_LOAD: begin
            if ((ms_match || !ms_full) && !lst_full) begin
              resp_miss = 1'b1;
              ms_alloc  = !ms_match;
              lst_alloc = 1'b1;
            end else resp_retry = 1'b1;
          end
          ACC_STORE: begin
            if ((ms_match || !ms_full) && (sb_hit || (!sb_full && !lst_full))) begin
              resp_miss      = 1'b1;
              ms_alloc       = !ms_match;
              sb_wr          = 1'b1;
              lst_alloc      = !sb_hit;
              lst_alloc_type = LST_SW;
              lst_alloc_dest = {{(4-SBW){1'b0}}, sb_alloc_idx};
            end else resp_retry = 1'b1;
          end
          default: begin  // prefetch
            if (ms_match || !ms_full) begin
              resp_miss = 1'b1;
              ms_alloc  = !ms_match;
            end else resp_retry = 1'b1;
          end
        endcase
        stat_access = resp_miss;
        stat_miss   = resp_miss;
      end
    end
  end

  // ------------------------------------------------------------ L2 request
  assign l2_req_valid = ms_iss_valid;
  assign l2_req_addr  = {ms_iss_blk, 5'd0};
  assign l2_req_mshr  = ms_iss_idx;
  assign ms_iss_ack   = l2_req_ready;

  // ------------------------------------------------------------ victim choice
  logic [WW-1:0] victim;
  logic          any_owned;
  always_comb begin
    logic found_inv;
    logic [4:0] best;
    victim    = '0;
    any_owned = 1'b0;
    found_inv = 1'b0;
    best      = '0;
    for (int w = 0; w < N_WAYS; w++) begin
      if (owned[w]) begin
        if (!fl_vld[w] && !found_inv) begin
          found_inv = 1'b1;
          victim    = WW'(w);
        end else if (!found_inv && (!any_owned || fl_age[w] > best)) begin
          best   = fl_age[w];
          victim = WW'(w);
        end
        any_owned = 1'b1;
      end
    end
  end

  // physical line being written by the fill engine
  always_comb begin
    cur_blk    = fblk_q + BLK_W'(fk_q);
    cur_set    = cur_blk[SW-1:0];
    cur_line   = fbuf_q[cur_blk[1:0]*PHYS_LINE_W +: PHYS_LINE_W];
    cur_merged = 1'b0;
    for (int e = 0; e < LST_N; e++) begin
      if (lst_rel_mask[e] && lst_type[e] == LST_SW) begin
        for (int s = 0; s < SB_N; s++) begin
          if (lst_dest[e] == 4'(s) && sb_valid[s] && sb_addr[s][31:5] == cur_blk) begin
            cur_line[sb_addr[s][4:2]*32 +: 32] = sb_data[s];
            cur_merged = 1'b1;
          end
        end
      end
    end
  end

  logic last_k;
  assign last_k = (fk_q == 2'((1 << fm_q) - 1));

  always_comb begin
    fl_set        = (fst_q == F_FLUSH) ? flset_q : cur_set;
    wr_en         = 1'b0;
    wr_way        = fway_q;
    wr_set        = cur_set;
    wr_tag        = cur_blk[BLK_W-1 -: TAG_W];
    wr_vld        = 1'b1;
    wr_dty        = cur_merged;
    wr_data       = cur_line;
    wb_valid      = 1'b0;
    wb_addr       = {fl_tag[fway_q], cur_set, 5'd0};
    wb_data       = fl_data[fway_q];
    l2_resp_ready = (fst_q == F_IDLE) && !flush_start;
    t_en          = 1'b0;
    t_way         = hit_way;
    t_set         = r_set;
    if (req_valid && resp_hit) begin
      t_en = 1'b1;
      // LRU is kept on the representative (first) set of the virtual set
      for (int b = 0; b < MAX_M; b++) if (b < int'(line_m)) t_set[b] = 1'b0;
    end
    unique case (fst_q)
      F_WRITE: begin
        if (fl_vld[fway_q] && fl_dty[fway_q]) wb_valid = 1'b1;
        wr_en = !wb_valid || wb_ready;
      end
      F_DONE: begin
        t_en  = 1'b1;
        t_way = fway_q;
        t_set = fblk_q[SW-1:0];
      end
      F_FLUSH: begin
        wb_addr = {fl_tag[flway_q], flset_q, 5'd0};
        wb_data = fl_data[flway_q];
        if (flmask_q[flway_q] && fl_vld[flway_q] && fl_dty[flway_q]) wb_valid = 1'b1;
        wr_en  = flmask_q[flway_q] && (!wb_valid || wb_ready);
        wr_way = flway_q;
        wr_set = flset_q;
        wr_tag = fl_tag[flway_q];
        wr_vld = 1'b0;
        wr_dty = 1'b0;
      end
      default: ;
    endcase
  end

  assign lst_rel        = (fst_q == F_DONE);
  assign ms_free        = (fst_q == F_DONE);
  assign ms_free_in     = fill_mshr_q;
  assign fill_done      = (fst_q == F_DONE);
  assign fill_done_mshr = fill_mshr_q;
  assign busy           = (fst_q != F_IDLE);

  always_comb begin
    sb_free = '0;
    if (fst_q == F_DONE)
      for (int e = 0; e < LST_N; e++)
        if (lst_rel_mask[e] && lst_type[e] == LST_SW) sb_free[lst_dest[e][SBW-1:0]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fst_q       <= F_IDLE;
      fbuf_q      <= '0;
      fblk_q      <= '0;
      fk_q        <= '0;
      fm_q        <= '0;
      fway_q      <= '0;
      fill_mshr_q <= '0;
      flmask_q    <= '0;
      flset_q     <= '0;
      flway_q     <= '0;
    end else begin
      unique case (fst_q)
        F_IDLE: begin
          if (flush_start) begin
            fst_q    <= F_FLUSH;
            flmask_q <= flush_mask;
            flset_q  <= '0;
            flway_q  <= '0;
          end else if (l2_resp_valid) begin
            fst_q       <= F_VICTIM;
            fbuf_q      <= l2_resp_data;
            fill_mshr_q <= l2_resp_mshr;
            fblk_q      <= ms_blk_of[l2_resp_mshr];
            fm_q        <= line_m;
            fk_q        <= '0;
          end
        end
        F_VICTIM: begin
          // fl_set points at the representative set (fk_q = 0)
          fway_q <= victim;
          fst_q  <= any_owned ? F_WRITE : F_DONE;
        end
        F_WRITE: begin
          if (wr_en) begin
            if (last_k) fst_q <= F_DONE;
            else        fk_q  <= fk_q + 2'd1;
          end
        end
        F_DONE: fst_q <= F_IDLE;
        F_FLUSH: begin
          if (wr_en || !flmask_q[flway_q]) begin
            if (flset_q == SW'(SETS-1)) begin
              flset_q <= '0;
              if (flway_q == WW'(N_WAYS-1)) fst_q <= F_IDLE;
              else flway_q <= flway_q + 1'b1;
            end else flset_q <= flset_q + 1'b1;
          end
        end
        default: fst_q <= F_IDLE;
      endcase
    end
  end

  a_hit_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(hit_vec));
endmodule
