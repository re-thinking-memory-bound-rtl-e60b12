// ra_temp_store: temporary storage for stores executed during runahead.
//
// During runahead a store whose address and data are both valid (not dummy)
// must not change the SPM or the cache; the paper redirects it to a
// temporary storage area, and later runahead loads that hit there use its
// data. This block is a small fully associative word store: a write to an
// address already present overwrites it, otherwise it takes the next slot in
// FIFO order (the oldest entry is replaced when full). Lookups are
// combinational. `clear` empties it when runahead ends.
//
// The paper places this area in a partition of the SPM; here it is a
// separate register array of ENTRIES words next to each SPM (size assumed).
// Lint note: address bits [1:0] are unused because entries hold aligned
// 32-bit words.
module ra_temp_store #(
  parameter int ENTRIES = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        wr_en,
  input  logic [31:0] wr_addr,
  input  logic [31:0] wr_data,
  input  logic [31:0] rd_addr,
  output logic        rd_hit,
  output logic [31:0] rd_data
);
  localparam int IW = $clog2(ENTRIES);
  logic [ENTRIES-1:0] vld_q;
  logic [29:0]        tag_q [ENTRIES];
  logic [31:0]        dat_q [ENTRIES];
  logic [IW-1:0]      ptr_q;

  logic          wr_match;
  logic [IW-1:0] wr_idx;
  always_comb begin
    wr_match = 1'b0;
    wr_idx   = ptr_q;
    for (int i = 0; i < ENTRIES; i++)
      if (vld_q[i] && tag_q[i] == wr_addr[31:2]) begin
        wr_match = 1'b1;
        wr_idx   = IW'(i);
      end
  end

  always_comb begin
    rd_hit  = 1'b0;
    rd_data = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (vld_q[i] && tag_q[i] == rd_addr[31:2]) begin
        rd_hit  = 1'b1;
        rd_data = dat_q[i];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q <= '0;
      ptr_q <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        tag_q[i] <= '0;
        dat_q[i] <= '0;
      end
    end else if (clear) begin
      vld_q <= '0;
      ptr_q <= '0;
    end else if (wr_en) begin
      vld_q[wr_idx] <= 1'b1;
      tag_q[wr_idx] <= wr_addr[31:2];
      dat_q[wr_idx] <= wr_data;
      if (!wr_match) ptr_q <= ptr_q + 1'b1;
    end
  end
endmodule
