// main_memory_model: behavioural DRAM model for the testbenches (not
// synthesizable, not part of the design).
//
// Contents: a word never written reads as init_word(addr), a fixed hash of
// its address, so tests can predict any value without loading memory;
// written words are kept in an associative array. Read requests (one per
// cycle while fewer than 64 are pending) are answered in order LATENCY
// cycles after acceptance with the whole 128 B line, sampled when the answer
// is given. Writes are accepted every cycle and applied at once, 32 B
// segment by segment as the mask says.
module main_memory_model
  import cgra_pkg::*;
#(
  parameter int LATENCY = 78,
  parameter int QW      = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 mrd_valid,
  input  logic [31:0]          mrd_addr,
  input  logic [QW-1:0]        mrd_tag,
  output logic                 mrd_ready,
  output logic                 mrs_valid,
  output logic [QW-1:0]        mrs_tag,
  output logic [L2_LINE_W-1:0] mrs_data,
  input  logic                 mrs_ready,
  input  logic                 mwr_valid,
  input  logic [31:0]          mwr_addr,
  input  logic [L2_LINE_W-1:0] mwr_data,
  input  logic [PHYS_PER_L2-1:0] mwr_mask,
  output logic                 mwr_ready,
  output int                   n_reads,
  output int                   n_writes
);
  logic [31:0] wmem [logic [31:0]];

  function automatic logic [31:0] init_word(input logic [31:0] a);
    return (a * 32'h9E37_79B1) ^ (a >> 7) ^ 32'h5A5A_0000;
  endfunction

  function automatic logic [31:0] rd_word(input logic [31:0] a);
    if (wmem.exists({a[31:2], 2'b00})) return wmem[{a[31:2], 2'b00}];
    return init_word({a[31:2], 2'b00});
  endfunction

  typedef struct {logic [31:0] addr; logic [QW-1:0] tag; longint due;} pend_t;
  pend_t q[$];
  longint now;

  assign mrd_ready = (q.size() < 64);
  assign mwr_ready = 1'b1;

  always_comb begin
    mrs_valid = 1'b0;
    mrs_tag   = '0;
    mrs_data  = '0;
    if (q.size() > 0 && q[0].due <= now) begin
      mrs_valid = 1'b1;
      mrs_tag   = q[0].tag;
      for (int i = 0; i < L2_LINE_B / 4; i++)
        mrs_data[32*i +: 32] = rd_word({q[0].addr[31:7], 7'd0} + 32'(4*i));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q.delete();
      now      <= 0;
      n_reads  <= 0;
      n_writes <= 0;
    end else begin
      now <= now + 1;
      if (mrs_valid && mrs_ready) void'(q.pop_front());
      if (mrd_valid && mrd_ready) begin
        q.push_back('{addr: mrd_addr, tag: mrd_tag, due: now + LATENCY});
        n_reads <= n_reads + 1;
      end
      if (mwr_valid) begin
        n_writes <= n_writes + 1;
        for (int s = 0; s < PHYS_PER_L2; s++)
          if (mwr_mask[s])
            for (int i = 0; i < PHYS_LINE_B / 4; i++)
              wmem[{mwr_addr[31:7], 7'd0} + 32'(PHYS_LINE_B*s + 4*i)] = mwr_data[PHYS_LINE_W*s + 32*i +: 32];
      end
    end
  end
endmodule
