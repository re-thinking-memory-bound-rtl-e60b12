// l2_cache: shared, non-inclusive L2 cache behind the L1 caches.
//
// Size, associativity, line size and hit latency follow the paper (128 KB,
// 8-way, 128 B lines, 8-cycle hit). Everything else is this design's choice:
// write-back with LRU replacement (per-line saturating ages), allocation on
// a memory refill, and L1 write-backs that update the line on a hit and go
// straight to memory on a miss (no allocation: the L2 does not have to hold
// what the L1s hold, i.e. it is non-inclusive).
//
// Requests from the N_CLIENT L1 controllers enter a request table of Q
// entries so that misses from many MSHRs overlap. The tag/data array does
// one operation per cycle, in this priority:
//   1. memory refill  (mrs_*): allocate the line, evict a dirty victim to
//      memory, mark the waiting entry ready;
//   2. L1 write-back  (wb_*):  lowest client first;
//   3. L1 read request (req_*): lowest client first; a hit parks the line in
//      the entry for HIT_LAT cycles, a miss sends a read to memory.
// Ready entries answer their L1 on resp_* (lowest entry first) with the whole
// 128 B line; the table entry number is the memory tag. Hit latency is
// counted from the cycle a request is accepted to the cycle resp_valid rises.
// Memory: mrd_* reads a line (any latency, any order, tagged); mwr_* writes a
// line with a mask of 32 B segments. The paper's 80-cycle miss latency is
// the memory's latency plus this block's.
//
// Lint note: the low 5 bits of the writeback address are unused because
// writebacks are whole 32 B physical lines.
// rst_n is reported as both synchronous and asynchronous only because an
// assertion uses it in `disable iff`; all flip-flops reset asynchronously.
module l2_cache
  import cgra_pkg::*;
#(
  parameter int N_CLIENT = 4,
  parameter int BYTES    = 128 * 1024,
  parameter int WAYS     = 8,
  parameter int HIT_LAT  = 8,
  parameter int Q        = 16,
  parameter int MSHR_N   = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      req_valid [N_CLIENT],
  input  logic [31:0]               req_addr  [N_CLIENT],
  input  logic [$clog2(MSHR_N)-1:0] req_mshr  [N_CLIENT],
  output logic                      req_ready [N_CLIENT],
  input  logic                      wb_valid  [N_CLIENT],
  input  logic [31:0]               wb_addr   [N_CLIENT],
  input  logic [PHYS_LINE_W-1:0]    wb_data   [N_CLIENT],
  output logic                      wb_ready  [N_CLIENT],
  output logic                      resp_valid[N_CLIENT],
  output logic [$clog2(MSHR_N)-1:0] resp_mshr,
  output logic [L2_LINE_W-1:0]      resp_data,
  input  logic                      resp_ready[N_CLIENT],
  // memory
  output logic                      mrd_valid,
  output logic [31:0]               mrd_addr,
  output logic [$clog2(Q)-1:0]      mrd_tag,
  input  logic                      mrd_ready,
  input  logic                      mrs_valid,
  input  logic [$clog2(Q)-1:0]      mrs_tag,
  input  logic [L2_LINE_W-1:0]      mrs_data,
  output logic                      mrs_ready,
  output logic                      mwr_valid,
  output logic [31:0]               mwr_addr,
  output logic [L2_LINE_W-1:0]      mwr_data,
  output logic [PHYS_PER_L2-1:0]    mwr_mask,
  input  logic                      mwr_ready,
  output logic                      stat_hit,
  output logic                      stat_miss
);
  localparam int SETS  = BYTES / L2_LINE_B / WAYS;
  localparam int SW    = $clog2(SETS);
  localparam int WW    = $clog2(WAYS);
  localparam int TAG_W = 32 - 7 - SW;
  localparam int QW    = $clog2(Q);
  localparam int CW    = (N_CLIENT > 1) ? $clog2(N_CLIENT) : 1;
  localparam int TW    = $clog2(HIT_LAT + 1);

  // ------------------------------------------------------------ arrays
  logic [L2_LINE_W-1:0] data_q [SETS*WAYS];
  logic [TAG_W-1:0]     tag_q  [SETS][WAYS];
  logic [WAYS-1:0]      vld_q  [SETS];
  logic [WAYS-1:0]      dty_q  [SETS];
  logic [2:0]           age_q  [SETS][WAYS];

  // ------------------------------------------------------------ request table
  typedef enum logic [1:0] {E_FREE, E_HIT, E_MEM, E_READY} est_e;
  est_e                 e_st   [Q];
  logic [TW-1:0]        e_tmr  [Q];
  logic [CW-1:0]        e_cli  [Q];
  logic [$clog2(MSHR_N)-1:0] e_mshr [Q];
  logic [31:0]          e_addr [Q];
  logic [L2_LINE_W-1:0] e_data [Q];

  logic          q_free;
  logic [QW-1:0] q_free_idx;
  logic          q_rdy;
  logic [QW-1:0] q_rdy_idx;
  always_comb begin
    q_free = 1'b0; q_free_idx = '0; q_rdy = 1'b0; q_rdy_idx = '0;
    for (int i = Q-1; i >= 0; i--) begin
      if (e_st[i] == E_FREE) begin q_free = 1'b1; q_free_idx = QW'(i); end
      if (e_st[i] == E_READY || (e_st[i] == E_HIT && e_tmr[i] == '0)) begin
        q_rdy = 1'b1; q_rdy_idx = QW'(i);
      end
    end
  end

  // ------------------------------------------------------------ operation select
  typedef enum logic [1:0] {OP_NONE, OP_FILL, OP_WB, OP_REQ} l2op_e;
  l2op_e         op;
  logic [CW-1:0] cli;
  logic [31:0]   op_addr;
  always_comb begin
    op = OP_NONE; cli = '0; op_addr = '0;
    if (mrs_valid) begin
      op = OP_FILL; op_addr = e_addr[mrs_tag];
    end else begin
      for (int c = N_CLIENT-1; c >= 0; c--)
        if (wb_valid[c]) begin op = OP_WB; cli = CW'(c); end
      if (op == OP_WB) op_addr = wb_addr[cli];
      else begin
        for (int c = N_CLIENT-1; c >= 0; c--)
          if (req_valid[c]) begin op = OP_REQ; cli = CW'(c); end
        if (op == OP_REQ) op_addr = req_addr[cli];
      end
    end
  end

  logic [SW-1:0]    o_set;
  logic [TAG_W-1:0] o_tag;
  assign o_set = op_addr[7 +: SW];
  assign o_tag = op_addr[31 -: TAG_W];

  logic          o_hit;
  logic [WW-1:0] o_way;
  logic [WW-1:0] o_vict;
  always_comb begin
    logic found_inv;
    logic [2:0] best;
    o_hit = 1'b0; o_way = '0; o_vict = '0; found_inv = 1'b0; best = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (vld_q[o_set][w] && tag_q[o_set][w] == o_tag) begin o_hit = 1'b1; o_way = WW'(w); end
      if (!vld_q[o_set][w] && !found_inv) begin found_inv = 1'b1; o_vict = WW'(w); end
      else if (!found_inv && age_q[o_set][w] > best) begin best = age_q[o_set][w]; o_vict = WW'(w); end
    end
  end

  logic [WW-1:0]        rd_way;
  logic [L2_LINE_W-1:0] rd_line;
  assign rd_way  = (op == OP_FILL && !o_hit) ? o_vict : o_way;
  assign rd_line = data_q[{o_set, rd_way}];

  // ------------------------------------------------------------ handshakes
  logic do_op;      // array operation takes place this cycle
  logic vict_dirty;
  assign vict_dirty = vld_q[o_set][o_vict] && dty_q[o_set][o_vict];

  always_comb begin
    do_op     = 1'b0;
    mrd_valid = 1'b0;
    mrd_addr  = {op_addr[31:7], 7'd0};
    mrd_tag   = q_free_idx;
    mwr_valid = 1'b0;
    mwr_addr  = {op_addr[31:7], 7'd0};
    mwr_data  = '0;
    mwr_mask  = '0;
    stat_hit  = 1'b0;
    stat_miss = 1'b0;
    unique case (op)
      OP_FILL: begin
        if (!o_hit && vict_dirty) begin
          mwr_valid = 1'b1;
          mwr_addr  = {tag_q[o_set][o_vict], o_set, 7'd0};
          mwr_data  = rd_line;
          mwr_mask  = '1;
          do_op     = mwr_ready;
        end else do_op = 1'b1;
      end
      OP_WB: begin
        if (!o_hit) begin
          mwr_valid = 1'b1;
          mwr_data  = {PHYS_PER_L2{wb_data[cli]}};
          mwr_mask  = PHYS_PER_L2'(1) << op_addr[6:5];
          do_op     = mwr_ready;
        end else do_op = 1'b1;
      end
      OP_REQ: begin
        if (q_free) begin
          if (o_hit) begin
            do_op    = 1'b1;
            stat_hit = 1'b1;
          end else begin
            mrd_valid = 1'b1;
            do_op     = mrd_ready;
            stat_miss = mrd_ready;
          end
        end
      end
      default: ;
    endcase
  end

  assign mrs_ready = (op == OP_FILL) && do_op;
  always_comb begin
    for (int c = 0; c < N_CLIENT; c++) begin
      wb_ready[c]  = (op == OP_WB)  && do_op && cli == CW'(c);
      req_ready[c] = (op == OP_REQ) && do_op && cli == CW'(c);
      resp_valid[c] = q_rdy && e_cli[q_rdy_idx] == CW'(c);
    end
  end
  assign resp_mshr = e_mshr[q_rdy_idx];
  assign resp_data = e_data[q_rdy_idx];

  logic resp_fire;
  always_comb begin
    resp_fire = 1'b0;
    for (int c = 0; c < N_CLIENT; c++) resp_fire |= resp_valid[c] && resp_ready[c];
  end

  // fill data: a line already present (written back meanwhile) wins over memory
  logic [L2_LINE_W-1:0] fill_line;
  assign fill_line = o_hit ? rd_line : mrs_data;

  // ------------------------------------------------------------ data array
  logic                 dw_en;
  logic [WW-1:0]        dw_way;
  logic [L2_LINE_W-1:0] dw_line;
  always_comb begin
    dw_en   = do_op && ((op == OP_FILL && !o_hit) || (op == OP_WB && o_hit));
    dw_way  = (op == OP_FILL) ? o_vict : o_way;
    dw_line = mrs_data;
    if (op == OP_WB) begin
      dw_line = rd_line;
      dw_line[op_addr[6:5]*PHYS_LINE_W +: PHYS_LINE_W] = wb_data[cli];
    end
  end

  always_ff @(posedge clk) begin
    if (dw_en) data_q[{o_set, dw_way}] <= dw_line;
  end

  // ------------------------------------------------------------ state
  logic          touch;
  logic [WW-1:0] touch_way;
  assign touch     = do_op && (op != OP_NONE) && !(op == OP_WB && !o_hit) && !(op == OP_REQ && !o_hit);
  assign touch_way = (op == OP_FILL && !o_hit) ? o_vict : o_way;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        vld_q[s] <= '0;
        dty_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) begin
          tag_q[s][w] <= '0;
          age_q[s][w] <= '0;
        end
      end
      for (int i = 0; i < Q; i++) begin
        e_st[i]   <= E_FREE;
        e_tmr[i]  <= '0;
        e_cli[i]  <= '0;
        e_mshr[i] <= '0;
        e_addr[i] <= '0;
        e_data[i] <= '0;
      end
    end else begin
      // hit timers
      for (int i = 0; i < Q; i++)
        if (e_st[i] == E_HIT && e_tmr[i] != '0) e_tmr[i] <= e_tmr[i] - 1'b1;
      if (resp_fire) e_st[q_rdy_idx] <= E_FREE;

      if (do_op) begin
        unique case (op)
          OP_FILL: begin
            if (!o_hit) begin
              vld_q[o_set][o_vict] <= 1'b1;
              dty_q[o_set][o_vict] <= 1'b0;
              tag_q[o_set][o_vict] <= o_tag;
            end
            e_st[mrs_tag]   <= E_READY;
            e_data[mrs_tag] <= fill_line;
          end
          OP_WB: if (o_hit) dty_q[o_set][o_way] <= 1'b1;
          OP_REQ: begin
            e_st[q_free_idx]   <= o_hit ? E_HIT : E_MEM;
            e_tmr[q_free_idx]  <= TW'(HIT_LAT - 1);
            e_cli[q_free_idx]  <= cli;
            e_mshr[q_free_idx] <= req_mshr[cli];
            e_addr[q_free_idx] <= {op_addr[31:7], 7'd0};
            e_data[q_free_idx] <= rd_line;
          end
          default: ;
        endcase
      end
      if (touch) begin
        for (int w = 0; w < WAYS; w++) begin
          if (WW'(w) == touch_way) age_q[o_set][w] <= '0;
          else if (age_q[o_set][w] != 3'd7) age_q[o_set][w] <= age_q[o_set][w] + 3'd1;
        end
      end
    end
  end

  a_fill_waits: assert property (@(posedge clk) disable iff (!rst_n) mrs_valid |-> e_st[mrs_tag] == E_MEM);
endmodule
