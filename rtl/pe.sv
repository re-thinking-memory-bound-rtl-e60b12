// pe: one processing element of the HyCUBE-style array, with runahead
// state save/restore.
//
// Structure (after the paper's PE figure): four input registers R0..R3 that
// capture the values arriving from the N, E, S and W neighbours, a crossbar
// switch, three operand registers P, I1, I2 in front of the ALU, the ALU and
// its result register RES, and a configuration memory that drives all of them
// for the current context.
//
// Each enabled cycle (en = 1, one "fire" of the array) the PE, under the
// control word of the current context:
//   * executes `op` on the P/I1/I2 values it holds and writes RES
//     (a LOAD writes RES with mem_rdata; a STORE leaves RES alone);
//   * loads P/I1/I2 from the crossbar for the next context (opnd_we);
//   * lets R_k capture the input from direction k (r_we[k]);
// while its four outputs are driven from registered sources (R0..R3, RES or
// the constant). Outputs never pass an input straight through, so the array
// has no combinational path between PEs; HyCUBE's single-cycle multi-hop
// routes are not modelled (the paper says its techniques do not rely on them).
//
// Runahead (paper Sec. 3.2 and 6.1): every state register has a backup
// register. `save` copies the current state into the backups (it may coincide
// with `en`; the backups then hold the state from before that cycle).
// `restore` loads the state registers from the backups through a multiplexer.
// Dummy flags travel with every value; the ALU ORs them.
//
// Memory PEs (IS_MEM = 1) present mem_req combinationally from I1 (address)
// and I2 (store data); the request is held stable until the array fires.
//
// Lint note: the reserved 55 bits of the configuration word are unused, as
// are the P/I1/I2 bits of the state argument of the output-select function,
// which reads only R0..R3 and RES.
// rst_n is reported as both synchronous and asynchronous only because an
// assertion uses it in `disable iff`; all flip-flops reset asynchronously.
module pe
  import cgra_pkg::*;
#(
  parameter int N_CTX  = 8,
  parameter bit IS_MEM = 1'b0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     save,
  input  logic                     restore,
  input  logic [$clog2(N_CTX)-1:0] ctx,
  // configuration write
  input  logic                     cfg_we,
  input  logic [$clog2(N_CTX)-1:0] cfg_ctx,
  input  cfg_word_t                cfg_word,
  // neighbour links
  input  word_t                    in_n,
  input  word_t                    in_e,
  input  word_t                    in_s,
  input  word_t                    in_w,
  output word_t                    out_n,
  output word_t                    out_e,
  output word_t                    out_s,
  output word_t                    out_w,
  // memory port (memory PEs only)
  output mem_req_t                 mem_req,
  input  word_t                    mem_rdata
);
  cfg_word_t cw;
  pe_config_mem #(.N_CTX(N_CTX)) u_cfg (
    .clk, .rst_n, .wr_en(cfg_we), .wr_ctx(cfg_ctx), .wr_word(cfg_word),
    .rd_ctx(ctx), .rd_word(cw)
  );

  // state registers and their backups
  typedef struct packed {
    word_t [3:0] r;
    word_t       res;
    word_t       p;
    word_t       i1;
    word_t       i2;
  } pe_state_t;

  pe_state_t st_q, bk_q, st_d;

  word_t const_w;
  assign const_w = '{dmy: 1'b0, v: cw.imm};

  function automatic word_t xsel(input src_e s, input pe_state_t st, input word_t n, input word_t e,
                                 input word_t so, input word_t w, input word_t c);
    unique case (s)
      SRC_IN_N:  return n;
      SRC_IN_E:  return e;
      SRC_IN_S:  return so;
      SRC_IN_W:  return w;
      SRC_R0:    return st.r[0];
      SRC_R1:    return st.r[1];
      SRC_R2:    return st.r[2];
      SRC_R3:    return st.r[3];
      SRC_RES:   return st.res;
      SRC_CONST: return c;
      default:   return '0;
    endcase
  endfunction

  // outputs: registered sources only
  function automatic word_t osel(input src_e s, input pe_state_t st, input word_t c);
    if (s inside {SRC_R0, SRC_R1, SRC_R2, SRC_R3, SRC_RES, SRC_CONST})
      return xsel(s, st, '0, '0, '0, '0, c);
    return '0;
  endfunction

  assign out_n = osel(cw.sel_n, st_q, const_w);
  assign out_e = osel(cw.sel_e, st_q, const_w);
  assign out_s = osel(cw.sel_s, st_q, const_w);
  assign out_w = osel(cw.sel_w, st_q, const_w);

  word_t alu_res;
  pe_alu u_alu (.op(cw.op), .pred_en(cw.pred_en), .p(st_q.p), .i1(st_q.i1), .i2(st_q.i2),
                .res(alu_res));

  // predicate: operation suppressed when P is a known zero
  logic pred_off;
  assign pred_off = cw.pred_en & ~st_q.p.dmy & (st_q.p.v == 32'd0);

  logic is_ld, is_st;
  assign is_ld = IS_MEM && (cw.op == OP_LOAD);
  assign is_st = IS_MEM && (cw.op == OP_STORE);

  always_comb begin
    mem_req          = '0;
    mem_req.valid    = (is_ld | is_st) & ~pred_off;
    mem_req.we       = is_st;
    mem_req.addr     = st_q.i1.v;
    mem_req.wdata    = st_q.i2.v;
    mem_req.addr_dmy = st_q.i1.dmy | (cw.pred_en & st_q.p.dmy);
    mem_req.data_dmy = st_q.i2.dmy;
  end

  always_comb begin
    st_d = st_q;
    // ALU / memory result
    if (!pred_off) begin
      if (is_ld)
        st_d.res = mem_rdata;
      else if (cw.op != OP_NOP && cw.op != OP_LOAD && cw.op != OP_STORE)
        st_d.res = alu_res;
    end
    // operand registers for the next context
    if (cw.opnd_we[0]) st_d.i1 = xsel(cw.sel_i1, st_q, in_n, in_e, in_s, in_w, const_w);
    if (cw.opnd_we[1]) st_d.i2 = xsel(cw.sel_i2, st_q, in_n, in_e, in_s, in_w, const_w);
    if (cw.opnd_we[2]) st_d.p  = xsel(cw.sel_p,  st_q, in_n, in_e, in_s, in_w, const_w);
    // input registers
    if (cw.r_we[0]) st_d.r[0] = in_n;
    if (cw.r_we[1]) st_d.r[1] = in_e;
    if (cw.r_we[2]) st_d.r[2] = in_s;
    if (cw.r_we[3]) st_d.r[3] = in_w;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= '0;
      bk_q <= '0;
    end else begin
      if (restore)  st_q <= bk_q;
      else if (en)  st_q <= st_d;
      if (save)     bk_q <= st_q;
    end
  end

  a_no_save_restore: assert property (@(posedge clk) disable iff (!rst_n) !(save && restore));
endmodule
