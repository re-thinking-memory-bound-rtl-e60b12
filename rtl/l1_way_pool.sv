// l1_way_pool: the shared pool of L1 cache ways with per-way permission
// registers (paper Sec. 3.4.1, "Cache Size Reconfiguration", and the cache
// block of its memory-subsystem figure).
//
// The L1 capacity of all virtual SPMs is one pool of N_WAYS ways. Each way
// has a permission register naming the L1 controller (and so the crossbar /
// virtual SPM) that owns it; PERM_NONE marks a way that is not allocated.
// Moving ways between controllers changes each cache's size and
// associativity while the number of sets per way stays a power of two.
// Reset gives every controller an equal, contiguous share (8 ways each for
// 32 ways and 4 controllers, i.e. 4 x 4 KB 8-way caches as in the paper).
//
// Each way stores SETS physical lines (tag, valid, dirty, data) and an LRU
// age per line. Every way is accessed only by its owner, so each port of a
// way is simply multiplexed from the owner's port:
//   lookup port (lk_set[c])  -> lk_* outputs of every way, read combinationally
//   fill port   (fl_set[c])  -> fl_* outputs (used for victim choice, write-back,
//                               and flushing)
//   line write  (wr_*[c])    -> writes tag/valid/dirty/data of one line
//   word write  (ww_*[c])    -> store hit: one 32-bit word, sets dirty
//   touch       (t_*[c])     -> LRU update: age of the touched line := 0,
//                               ages of the owner's other ways in that set +1
//                               (saturating), so the largest age is the LRU way
// Controllers must only name ways they own; the pool ignores the rest.
module l1_way_pool
  import cgra_pkg::*;
#(
  parameter int N_WAYS = 32,
  parameter int SETS   = 16,
  parameter int N_CTRL = 4,
  parameter int TAG_W  = 23
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // permission registers
  input  logic                      perm_we,
  input  logic [$clog2(N_WAYS)-1:0] perm_way,
  input  logic [3:0]                perm_val,
  output logic [3:0]                perm [N_WAYS],
  // per-controller ports
  input  logic [$clog2(SETS)-1:0]   lk_set [N_CTRL],
  input  logic [$clog2(SETS)-1:0]   fl_set [N_CTRL],
  input  logic                      wr_en  [N_CTRL],
  input  logic [$clog2(N_WAYS)-1:0] wr_way [N_CTRL],
  input  logic [$clog2(SETS)-1:0]   wr_set [N_CTRL],
  input  logic [TAG_W-1:0]          wr_tag [N_CTRL],
  input  logic                      wr_vld [N_CTRL],
  input  logic                      wr_dty [N_CTRL],
  input  logic [PHYS_LINE_W-1:0]    wr_data[N_CTRL],
  input  logic                      ww_en  [N_CTRL],
  input  logic [$clog2(N_WAYS)-1:0] ww_way [N_CTRL],
  input  logic [$clog2(SETS)-1:0]   ww_set [N_CTRL],
  input  logic [2:0]                ww_word[N_CTRL],
  input  logic [31:0]               ww_data[N_CTRL],
  input  logic                      t_en   [N_CTRL],
  input  logic [$clog2(N_WAYS)-1:0] t_way  [N_CTRL],
  input  logic [$clog2(SETS)-1:0]   t_set  [N_CTRL],
  // per-way outputs
  output logic                      lk_vld [N_WAYS],
  output logic [TAG_W-1:0]          lk_tag [N_WAYS],
  output logic [PHYS_LINE_W-1:0]    lk_data[N_WAYS],
  output logic                      fl_vld [N_WAYS],
  output logic                      fl_dty [N_WAYS],
  output logic [TAG_W-1:0]          fl_tag [N_WAYS],
  output logic [4:0]                fl_age [N_WAYS],
  output logic [PHYS_LINE_W-1:0]    fl_data[N_WAYS]
);
  localparam int WPC = N_WAYS / N_CTRL;
  localparam int SW  = $clog2(SETS);

  logic [3:0] perm_q [N_WAYS];
  assign perm = perm_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < N_WAYS; w++) perm_q[w] <= 4'(w / WPC);
    end else if (perm_we) begin
      perm_q[perm_way] <= perm_val;
    end
  end

  for (genvar w = 0; w < N_WAYS; w++) begin : g_way
    logic [PHYS_LINE_W-1:0] data_q [SETS];
    logic [TAG_W-1:0]       tag_q  [SETS];
    logic [SETS-1:0]        vld_q, dty_q;
    logic [4:0]             age_q  [SETS];

    // owner's port selection (unowned ways see controller 0's ports, unused)
    logic [1:0] own;
    logic       owned;
    assign owned = perm_q[w] < 4'(N_CTRL);
    assign own   = owned ? perm_q[w][1:0] : 2'd0;

    logic [SW-1:0] lks, fls;
    assign lks = lk_set[own];
    assign fls = fl_set[own];

    assign lk_vld[w]  = owned & vld_q[lks];
    assign lk_tag[w]  = tag_q[lks];
    assign lk_data[w] = data_q[lks];
    assign fl_vld[w]  = owned & vld_q[fls];
    assign fl_dty[w]  = dty_q[fls];
    assign fl_tag[w]  = tag_q[fls];
    assign fl_age[w]  = age_q[fls];
    assign fl_data[w] = data_q[fls];

    logic do_wr, do_ww, do_t0, do_tx;
    assign do_wr = owned && wr_en[own] && wr_way[own] == ($clog2(N_WAYS))'(w);
    assign do_ww = owned && ww_en[own] && ww_way[own] == ($clog2(N_WAYS))'(w);
    assign do_t0 = owned && t_en[own]  && t_way[own]  == ($clog2(N_WAYS))'(w);
    assign do_tx = owned && t_en[own]  && t_way[own]  != ($clog2(N_WAYS))'(w);

    always_ff @(posedge clk) begin
      if (do_wr) data_q[wr_set[own]] <= wr_data[own];
      if (do_ww) data_q[ww_set[own]][ww_word[own]*32 +: 32] <= ww_data[own];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vld_q <= '0;
        dty_q <= '0;
        for (int s = 0; s < SETS; s++) begin
          tag_q[s] <= '0;
          age_q[s] <= '0;
        end
      end else begin
        if (do_wr) begin
          tag_q[wr_set[own]] <= wr_tag[own];
          vld_q[wr_set[own]] <= wr_vld[own];
          dty_q[wr_set[own]] <= wr_dty[own];
        end
        if (do_ww) dty_q[ww_set[own]] <= 1'b1;
        if (do_t0) age_q[t_set[own]] <= '0;
        else if (do_tx && age_q[t_set[own]] != 5'd31) age_q[t_set[own]] <= age_q[t_set[own]] + 5'd1;
      end
    end
  end
endmodule
