// tb_pe: one memory PE (IS_MEM = 1) with random configurations in all 8
// contexts, random neighbour inputs and memory data, random enable, save
// and restore. A reference model of the PE state (R0-R3, RES, P, I1, I2
// with dummy flags and a backup copy) checks outputs, memory requests and
// the state after every cycle, so predication, operand loading for the next
// context, register capture, load results and checkpoint/restore are all
// covered.
`timescale 1ns/1ps
module tb_pe;
  import cgra_pkg::*;
  localparam int N_CTX = 8;
  logic clk = 0, rst_n = 0, en = 0, save = 0, restore = 0, cfg_we = 0;
  logic [2:0] ctx = 0, cfg_ctx = 0;
  cfg_word_t cfg_word = '0;
  word_t in_n, in_e, in_s, in_w, out_n, out_e, out_s, out_w, mem_rdata;
  mem_req_t mem_req;
  always #5 clk = ~clk;
  pe #(.N_CTX(N_CTX), .IS_MEM(1'b1)) dut (.*);

  typedef struct { word_t r [4]; word_t res, p, i1, i2; } st_t;
  st_t s, bk;
  cfg_word_t cfgm [N_CTX];
  int checks = 0, failures = 0, n_pred = 0, n_ld = 0, n_rest = 0;
  task automatic chk(bit ok, string m);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask

  function automatic word_t alu(op_e o, logic pe_, word_t pp, word_t a, word_t b);
    word_t r;
    unique case (o)
      OP_ADD: r.v = a.v + b.v;   OP_SUB: r.v = a.v - b.v;   OP_MUL: r.v = a.v * b.v;
      OP_AND: r.v = a.v & b.v;   OP_OR:  r.v = a.v | b.v;   OP_XOR: r.v = a.v ^ b.v;
      OP_SHL: r.v = a.v << b.v[4:0]; OP_LSHR: r.v = a.v >> b.v[4:0];
      OP_ASHR: r.v = $signed(a.v) >>> b.v[4:0];
      OP_CMPEQ: r.v = {31'd0, a.v == b.v}; OP_CMPLT: r.v = {31'd0, $signed(a.v) < $signed(b.v)};
      OP_MOV: r.v = a.v;
      default: r.v = 0;
    endcase
    r.dmy = a.dmy | ((o != OP_MOV) & b.dmy) | (pe_ & pp.dmy);
    return r;
  endfunction
  function automatic word_t sel(src_e x, word_t c);
    unique case (x)
      SRC_IN_N: return in_n; SRC_IN_E: return in_e; SRC_IN_S: return in_s; SRC_IN_W: return in_w;
      SRC_R0: return s.r[0]; SRC_R1: return s.r[1]; SRC_R2: return s.r[2]; SRC_R3: return s.r[3];
      SRC_RES: return s.res; SRC_CONST: return c; default: return '0;
    endcase
  endfunction
  function automatic word_t osel(src_e x, word_t c);
    return (x inside {SRC_R0, SRC_R1, SRC_R2, SRC_R3, SRC_RES, SRC_CONST}) ? sel(x, c) : '0;
  endfunction
  function automatic word_t rw();
    return '{dmy: ($urandom % 6) == 0, v: ($urandom % 3 == 0) ? 32'($urandom % 3) : $urandom};
  endfunction

  initial begin
    s = '{r: '{default: '0}, res: '0, p: '0, i1: '0, i2: '0};
    bk = s;
    in_n = '0; in_e = '0; in_s = '0; in_w = '0; mem_rdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // program all contexts with random words
    for (int c = 0; c < N_CTX; c++) begin
      cfg_word_t w;
      w = {$urandom, $urandom, $urandom, $urandom};
      w.op = op_e'($urandom % 15);
      w.sel_p = src_e'($urandom % 11); w.sel_i1 = src_e'($urandom % 11); w.sel_i2 = src_e'($urandom % 11);
      w.sel_n = src_e'($urandom % 11); w.sel_e = src_e'($urandom % 11);
      w.sel_s = src_e'($urandom % 11); w.sel_w = src_e'($urandom % 11);
      @(negedge clk); cfg_we = 1; cfg_ctx = 3'(c); cfg_word = w; cfgm[c] = w;
    end
    @(negedge clk); cfg_we = 0;
    for (int n = 0; n < 20000; n++) begin
      cfg_word_t w; word_t cw_c; bit poff; st_t nx;
      @(negedge clk);
      ctx = 3'($urandom); en = $urandom % 4 != 0;
      save = ($urandom % 50) == 0; restore = !save && ($urandom % 60) == 0;
      in_n = rw(); in_e = rw(); in_s = rw(); in_w = rw(); mem_rdata = rw();
      // occasionally reprogram a context
      cfg_we = ($urandom % 200) == 0; cfg_ctx = 3'($urandom);
      if (cfg_we) begin cfg_word = cfgm[cfg_ctx]; cfg_word.op = op_e'($urandom % 15); cfg_word.imm = $urandom; end
      #1;
      w = cfgm[ctx];
      cw_c = '{dmy: 1'b0, v: w.imm};
      poff = w.pred_en && !s.p.dmy && s.p.v == 0;
      chk(out_n == osel(w.sel_n, cw_c) && out_e == osel(w.sel_e, cw_c) &&
          out_s == osel(w.sel_s, cw_c) && out_w == osel(w.sel_w, cw_c), "outputs");
      chk(mem_req.valid == ((w.op == OP_LOAD || w.op == OP_STORE) && !poff), "mem valid");
      if (mem_req.valid) chk(mem_req.we == (w.op == OP_STORE) && mem_req.addr == s.i1.v && mem_req.wdata == s.i2.v &&
                             mem_req.addr_dmy == (s.i1.dmy | (w.pred_en & s.p.dmy)) && mem_req.data_dmy == s.i2.dmy, "mem request");
      nx = s;
      if (!poff) begin
        if (w.op == OP_LOAD) begin nx.res = mem_rdata; n_ld++; end
        else if (w.op != OP_NOP && w.op != OP_STORE) nx.res = alu(w.op, w.pred_en, s.p, s.i1, s.i2);
      end else n_pred++;
      if (w.opnd_we[0]) nx.i1 = sel(w.sel_i1, cw_c);
      if (w.opnd_we[1]) nx.i2 = sel(w.sel_i2, cw_c);
      if (w.opnd_we[2]) nx.p  = sel(w.sel_p, cw_c);
      if (w.r_we[0]) nx.r[0] = in_n; if (w.r_we[1]) nx.r[1] = in_e;
      if (w.r_we[2]) nx.r[2] = in_s; if (w.r_we[3]) nx.r[3] = in_w;
      @(posedge clk);
      if (save) bk = s;
      if (restore) begin s = bk; n_rest++; end
      else if (en) s = nx;
      if (cfg_we) cfgm[cfg_ctx] = cfg_word;
      #1;
      chk(dut.st_q.res == s.res && dut.st_q.i1 == s.i1 && dut.st_q.i2 == s.i2 && dut.st_q.p == s.p &&
          dut.st_q.r[0] == s.r[0] && dut.st_q.r[3] == s.r[3], $sformatf("state after cycle %0d", n));
    end
    chk(n_pred > 0 && n_ld > 0 && n_rest > 0, "predication, loads and restores exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
