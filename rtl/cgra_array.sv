// cgra_array: ROWS x COLS mesh of PEs with the global context sequencer.
//
// Every PE is linked to its four neighbours; links at the array boundary read
// zero. The PEs of the left column (one per row) are the memory-accessing PEs
// and expose a memory port each, as in the paper's HyCUBE set-up where memory
// is reached from the left-hand PEs.
//
// The array is fully synchronous and handshake-free: all PEs step together.
// `fire` advances every PE and the context counter by one cycle; when the
// memory system cannot complete all requests of the current context, the
// caller withholds `fire` and the whole array stalls (paper Sec. 2.2).
// The context counter runs 0 .. ctx_len-1 and wraps (modulo schedule).
//
// Runahead: `save` copies the state of every PE and the context counter to
// backup registers, `restore` brings them back (paper Fig. 6). Both are
// broadcast to all PEs.
//
// Configuration words are written one PE/context at a time through cfg_*.
//
// Lint note: `mreq` of PEs outside the left column is unused because only
// the left-column PEs are memory PEs; those PEs never issue requests.
// rst_n is reported as both synchronous and asynchronous only because the
// PE assertions use it in `disable iff`.
module cgra_array
  import cgra_pkg::*;
#(
  parameter int ROWS  = 8,
  parameter int COLS  = 8,
  parameter int N_CTX = 8
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             fire,
  input  logic                             save,
  input  logic                             restore,
  input  logic [$clog2(N_CTX):0]           ctx_len,
  output logic [$clog2(N_CTX)-1:0]         ctx,
  // configuration
  input  logic                             cfg_we,
  input  logic [$clog2(ROWS*COLS)-1:0]     cfg_pe,
  input  logic [$clog2(N_CTX)-1:0]         cfg_ctx,
  input  cfg_word_t                        cfg_word,
  // memory ports of the left-column PEs, index = row
  output mem_req_t                         mem_req   [ROWS],
  input  word_t                            mem_rdata [ROWS]
);
  localparam int CW = $clog2(N_CTX);

  logic [CW-1:0] ctx_q, ctx_bk_q;
  assign ctx = ctx_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctx_q    <= '0;
      ctx_bk_q <= '0;
    end else begin
      if (restore) ctx_q <= ctx_bk_q;
      else if (fire) ctx_q <= ({1'b0, ctx_q} + 1'b1 >= ctx_len) ? '0 : ctx_q + 1'b1;
      if (save) ctx_bk_q <= ctx_q;
    end
  end

  word_t o_n [ROWS][COLS];
  word_t o_e [ROWS][COLS];
  word_t o_s [ROWS][COLS];
  word_t o_w [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      word_t i_n, i_e, i_s, i_w;
      // input from the north comes from the south output of the PE above
      assign i_n = (r > 0)        ? o_s[(r > 0) ? r-1 : 0][c] : '0;
      assign i_s = (r < ROWS-1)   ? o_n[(r < ROWS-1) ? r+1 : r][c] : '0;
      assign i_w = (c > 0)        ? o_e[r][(c > 0) ? c-1 : 0] : '0;
      assign i_e = (c < COLS-1)   ? o_w[r][(c < COLS-1) ? c+1 : c] : '0;

      mem_req_t mreq;
      word_t    mrd;
      if (c == 0) begin : g_mem
        assign mem_req[r] = mreq;
        assign mrd        = mem_rdata[r];
      end else begin : g_nomem
        assign mrd = '0;
      end

      pe #(.N_CTX(N_CTX), .IS_MEM(c == 0)) u_pe (
        .clk, .rst_n, .en(fire), .save, .restore, .ctx(ctx_q),
        .cfg_we(cfg_we && (cfg_pe == ($clog2(ROWS*COLS))'(r*COLS + c))),
        .cfg_ctx, .cfg_word,
        .in_n(i_n), .in_e(i_e), .in_s(i_s), .in_w(i_w),
        .out_n(o_n[r][c]), .out_e(o_e[r][c]), .out_s(o_s[r][c]), .out_w(o_w[r][c]),
        .mem_req(mreq), .mem_rdata(mrd)
      );
    end
  end
endmodule
