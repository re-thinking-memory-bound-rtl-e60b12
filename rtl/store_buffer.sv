// store_buffer: holds the data of L1 write misses until the block arrives.
//
// With a write-allocate, non-blocking cache a store that misses does not
// stall: its word goes here and the Load/Store Table records the entry index.
// When the line is filled the cache merges the word into it and frees the
// entry. A second store to a word already buffered overwrites that entry
// (coalescing), so an address is never held twice and merge order does not
// matter. Allocation takes the lowest free entry; `alloc_idx` tells which.
// Depth (8) is assumed; the paper names the buffer but does not size it.
// rst_n is reported as both synchronous and asynchronous only because an
// assertion uses it in `disable iff`; all flip-flops reset asynchronously.
module store_buffer #(
  parameter int N = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [31:0]          lk_addr,
  output logic                 lk_hit,
  output logic [$clog2(N)-1:0] lk_idx,
  input  logic                 wr_en,      // allocate or coalesce
  input  logic [31:0]          wr_addr,
  input  logic [31:0]          wr_data,
  output logic [$clog2(N)-1:0] alloc_idx,
  output logic                 full,
  input  logic [N-1:0]         free_mask,
  output logic [N-1:0]         e_valid,
  output logic [31:0]          e_addr [N],
  output logic [31:0]          e_data [N]
);
  localparam int IW = $clog2(N);
  logic [N-1:0] vld_q;
  logic [31:0]  adr_q [N];
  logic [31:0]  dat_q [N];

  always_comb begin
    lk_hit    = 1'b0;
    lk_idx    = '0;
    alloc_idx = '0;
    for (int i = N-1; i >= 0; i--) begin
      if (!vld_q[i]) alloc_idx = IW'(i);
      if (vld_q[i] && adr_q[i][31:2] == lk_addr[31:2]) begin
        lk_hit = 1'b1;
        lk_idx = IW'(i);
      end
    end
  end
  assign full    = &vld_q;
  assign e_valid = vld_q;
  assign e_addr  = adr_q;
  assign e_data  = dat_q;

  // the write uses the lookup port's result for wr_addr (lk_addr must equal wr_addr)
  logic [IW-1:0] widx;
  assign widx = lk_hit ? lk_idx : alloc_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q <= '0;
      for (int i = 0; i < N; i++) begin
        adr_q[i] <= '0;
        dat_q[i] <= '0;
      end
    end else begin
      vld_q <= vld_q & ~free_mask;
      if (wr_en && (lk_hit || !full)) begin
        vld_q[widx] <= 1'b1;
        adr_q[widx] <= wr_addr;
        dat_q[widx] <= wr_data;
      end
    end
  end

  a_same_addr: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> lk_addr == wr_addr);
endmodule
