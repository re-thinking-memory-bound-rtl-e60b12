// pe_config_mem: configuration memory of one PE.
//
// Holds one cfg_word_t per context (HyCUBE supports up to 8 contexts, which
// is the default depth). The word for the current context is read
// combinationally; the host writes whole words through a simple write port
// (one word per clock). Reset clears every context to a NOP word so that an
// unconfigured PE does nothing. The write-port protocol is this design's
// choice; the paper only names the memory and its role.
module pe_config_mem
  import cgra_pkg::*;
#(
  parameter int N_CTX = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [$clog2(N_CTX)-1:0] wr_ctx,
  input  cfg_word_t                wr_word,
  input  logic [$clog2(N_CTX)-1:0] rd_ctx,
  output cfg_word_t                rd_word
);
  cfg_word_t mem_q [N_CTX];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_CTX; i++) mem_q[i] <= '0;
    end else if (wr_en) begin
      mem_q[wr_ctx] <= wr_word;
    end
  end

  assign rd_word = mem_q[rd_ctx];
endmodule
