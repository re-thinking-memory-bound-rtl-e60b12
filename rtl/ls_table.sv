// ls_table: Load/Store Table of one non-blocking L1 cache.
//
// One entry per outstanding miss, with the fields of the paper's figure:
// Valid, MSHR Entry (the MSHR the miss waits on), Dest Reg, Type and Offset.
// For a read miss Dest Reg names the crossbar port that missed (the request
// that stalled the array or started runahead); for a write miss it is the
// index of the store-buffer entry that holds the data. Type is LW, SW or PF
// (a runahead prefetch). Offset is the byte offset within the virtual line.
//
// When an MSHR completes, `release` with its index frees every entry that
// waits on it in one cycle; `rel_mask` shows, before the edge, which entries
// those are, so the cache can merge their store-buffer data. Allocation takes
// the lowest free entry. The table depth (16) is assumed: the paper does not
// size it.
module ls_table
  import cgra_pkg::*;
#(
  parameter int N      = 16,
  parameter int MSHR_N = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      alloc,
  input  logic [$clog2(MSHR_N)-1:0] alloc_mshr,
  input  logic [3:0]                alloc_dest,
  input  lst_type_e                 alloc_type,
  input  logic [6:0]                alloc_off,
  output logic                      full,
  input  logic                      release_en,
  input  logic [$clog2(MSHR_N)-1:0] release_mshr,
  output logic [N-1:0]              rel_mask,
  output logic [N-1:0]              e_valid,
  output logic [3:0]                e_dest [N],
  output lst_type_e                 e_type [N],
  output logic [6:0]                e_off  [N]
);
  localparam int IW = $clog2(N);
  logic [N-1:0]              vld_q;
  logic [$clog2(MSHR_N)-1:0] mshr_q [N];
  logic [3:0]                dest_q [N];
  lst_type_e                 type_q [N];
  logic [6:0]                off_q  [N];

  logic [IW-1:0] fidx;
  always_comb begin
    fidx = '0;
    for (int i = N-1; i >= 0; i--) if (!vld_q[i]) fidx = IW'(i);
    for (int i = 0; i < N; i++) rel_mask[i] = vld_q[i] && (mshr_q[i] == release_mshr);
  end
  assign full    = &vld_q;
  assign e_valid = vld_q;
  assign e_dest  = dest_q;
  assign e_type  = type_q;
  assign e_off   = off_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q <= '0;
      for (int i = 0; i < N; i++) begin
        mshr_q[i] <= '0;
        dest_q[i] <= '0;
        type_q[i] <= LST_LW;
        off_q[i]  <= '0;
      end
    end else begin
      if (release_en) vld_q <= vld_q & ~rel_mask;
      if (alloc && !full) begin
        vld_q[fidx]  <= 1'b1;
        mshr_q[fidx] <= alloc_mshr;
        dest_q[fidx] <= alloc_dest;
        type_q[fidx] <= alloc_type;
        off_q[fidx]  <= alloc_off;
      end
    end
  end
endmodule
