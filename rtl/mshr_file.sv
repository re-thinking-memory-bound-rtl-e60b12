// mshr_file: Miss Status Handling Registers of one non-blocking L1 cache.
//
// Each entry has the three fields of the paper's MSHR figure: Valid, Block
// Address and Issued. Valid marks the entry as occupied and is cleared when
// the block has been filled; Issued says the request has been handed to the
// next level (L2), since a request may not go out in the cycle it is
// allocated. The block address is the address of the (virtual) cache line
// with the byte offset within a physical line dropped.
//
// Interface (all lookups combinational, updates on the clock edge):
//   lookup: match/match_idx for blk_addr among valid entries
//   alloc : writes a new entry at free_idx (lowest free index); full when none
//   issue : iss_valid/iss_idx/iss_blk name the lowest valid, not issued entry;
//           iss_ack marks it issued
//   free  : clears entry free_idx_in
// Entry count follows the paper (16 per L1 cache); the ordering policy for
// issuing is this design's choice.
// rst_n is reported as both synchronous and asynchronous only because an
// assertion uses it in `disable iff`; all flip-flops reset asynchronously.
module mshr_file #(
  parameter int N     = 16,
  parameter int BLK_W = 27
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [BLK_W-1:0]     lk_blk,
  output logic                 lk_match,
  output logic [$clog2(N)-1:0] lk_idx,
  input  logic                 alloc,
  input  logic [BLK_W-1:0]     alloc_blk,
  output logic                 full,
  output logic [$clog2(N)-1:0] free_idx,
  output logic                 iss_valid,
  output logic [$clog2(N)-1:0] iss_idx,
  output logic [BLK_W-1:0]     iss_blk,
  input  logic                 iss_ack,
  input  logic                 free_en,
  input  logic [$clog2(N)-1:0] free_idx_in,
  output logic                 empty,
  output logic [BLK_W-1:0]     blk_of [N]
);
  localparam int IW = $clog2(N);
  logic [N-1:0] vld_q, iss_q;
  logic [BLK_W-1:0] blk_q [N];

  assign blk_of = blk_q;
  assign empty  = (vld_q == '0);
  assign full   = &vld_q;

  always_comb begin
    lk_match  = 1'b0;
    lk_idx    = '0;
    free_idx  = '0;
    iss_valid = 1'b0;
    iss_idx   = '0;
    for (int i = N-1; i >= 0; i--) begin
      if (vld_q[i] && blk_q[i] == lk_blk) begin
        lk_match = 1'b1;
        lk_idx   = IW'(i);
      end
      if (!vld_q[i]) free_idx = IW'(i);
      if (vld_q[i] && !iss_q[i]) begin
        iss_valid = 1'b1;
        iss_idx   = IW'(i);
      end
    end
    iss_blk = blk_q[iss_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q <= '0;
      iss_q <= '0;
      for (int i = 0; i < N; i++) blk_q[i] <= '0;
    end else begin
      if (free_en) begin
        vld_q[free_idx_in] <= 1'b0;
        iss_q[free_idx_in] <= 1'b0;
      end
      if (iss_ack && iss_valid) iss_q[iss_idx] <= 1'b1;
      if (alloc && !full) begin
        vld_q[free_idx] <= 1'b1;
        iss_q[free_idx] <= 1'b0;
        blk_q[free_idx] <= alloc_blk;
      end
    end
  end

  a_alloc_not_full: assert property (@(posedge clk) disable iff (!rst_n) alloc |-> !full);
endmodule
