// tb_mmio_regs: host register file. Checks reset values, write/read-back of
// every control register, command pulses (apply, irq_clr, restart) lasting
// one cycle, the 128-bit configuration staging and commit (PE/context
// decode), the way-permission and line-size request registers, SPM window
// decode (write strobes and read mux per virtual SPM), the status, permission
// and tracker read windows.
`timescale 1ns/1ps
module tb_mmio_regs;
  import cgra_pkg::*;
  logic clk = 0, rst_n = 0, bus_valid = 0, bus_we = 0;
  logic [19:0] bus_addr = 0;
  logic [31:0] bus_wdata = 0, bus_rdata;
  logic run, ra_en, mon_en, apply, irq_clr, restart, cfg_we;
  logic [3:0] ctx_len;
  logic [31:0] iter_limit, tr, mon_win, trk_win, spm_wdata;
  logic [3:0] rr_perm [32], perm [32];
  logic [1:0] rr_m [4];
  logic [5:0] cfg_pe; logic [2:0] cfg_ctx; cfg_word_t cfg_word;
  logic spm_we [4]; logic [8:0] spm_addr; logic [31:0] spm_rdata [4];
  logic [31:0] stat [16];
  logic [2:0] trk_pe; logic [5:0] trk_idx; logic [31:0] trk_addr; logic [15:0] trk_time;
  logic [6:0] trk_cnt [8];
  always #5 clk = ~clk;
  mmio_regs dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string m);
    checks++; if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", m); end
  endtask
  task automatic wr(logic [19:0] a, logic [31:0] d);
    @(negedge clk); bus_valid = 1; bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_valid = 0; bus_we = 0;
  endtask
  logic [31:0] rv;
  task automatic rdt(logic [19:0] a);
    bus_addr = a; #1;
    rv = bus_rdata;
  endtask

  // bench-side models of the read sources
  assign trk_addr = {13'd0, trk_pe, trk_idx, 10'h155};
  assign trk_time = {7'd0, trk_pe, trk_idx};
  always_comb for (int c = 0; c < 4; c++) spm_rdata[c] = {c[7:0], 15'd0, spm_addr};

  int n_apply = 0, n_clr = 0, n_rst = 0;
  always @(posedge clk) begin
    if (apply) n_apply++;
    if (irq_clr) n_clr++;
    if (restart) n_rst++;
  end

  initial begin
    for (int i = 0; i < 16; i++) stat[i] = 32'h1000 + i;
    for (int w = 0; w < 32; w++) perm[w] = 4'(w % 5);
    for (int p = 0; p < 8; p++) trk_cnt[p] = 7'(p * 3);
    repeat (2) @(negedge clk);
    rst_n = 1;
    #1;
    chk(!run && !ra_en && !mon_en && ctx_len == 1 && tr == 16 && mon_win == 1024 && trk_win == 1024, "reset values");
    for (int w = 0; w < 32; w++) chk(rr_perm[w] == 4'(w / 8), "reset way request");
    wr(20'h00000, 3'b111); rdt(20'h00000); chk(run && ra_en && mon_en && rv == 7, "CTRL");
    wr(20'h0000C, 4); rdt(20'h0000C); chk(ctx_len == 4 && rv == 4, "CTX_LEN");
    wr(20'h00010, 32'd12345); rdt(20'h00010); chk(iter_limit == 12345 && rv == 12345, "ITER_LIMIT");
    wr(20'h00014, 7); rdt(20'h00014); chk(tr == 7 && rv == 7, "TR");
    wr(20'h00018, 99); rdt(20'h00018); chk(mon_win == 99 && rv == 99, "MON_WIN");
    wr(20'h0001C, 77); rdt(20'h0001C); chk(trk_win == 77 && rv == 77, "TRK_WIN");
    wr(20'h00004, 3'b001); wr(20'h00004, 3'b010); wr(20'h00004, 3'b100);
    chk(n_apply == 1 && n_clr == 1 && n_rst == 1, "command pulses last one cycle");
    for (int k = 0; k < 4; k++) wr(20'h00040 + 20'(4*k), 32'h7654_3210 + k);
    for (int k = 0; k < 4; k++) begin
      rdt(20'h00040 + 20'(4*k)); chk(rv == 32'h7654_3210 + k, "RR_PERM readback");
      chk(rr_perm[8*k] == 4'(k) && rr_perm[8*k+7] == 4'h7, "RR_PERM decode");
    end
    wr(20'h00060, 8'b10_00_01_10);
    chk(rr_m[0] == 2 && rr_m[1] == 1 && rr_m[2] == 0 && rr_m[3] == 2, "RR_LINE");
    // configuration staging + commit
    begin
      logic [127:0] w;
      w = {$urandom, $urandom, $urandom, $urandom};
      for (int k = 0; k < 4; k++) wr(20'h00080 + 20'(4*k), w[32*k +: 32]);
      @(negedge clk); bus_valid = 1; bus_we = 1; bus_addr = 20'h00090; bus_wdata = (37 << 3) | 5; #1;
      chk(cfg_we && cfg_pe == 37 && cfg_ctx == 5 && cfg_word == w, "configuration commit");
      @(negedge clk); bus_valid = 0; bus_we = 0; #1;
      chk(!cfg_we, "commit is a single strobe");
    end
    // SPM window
    for (int c = 0; c < 4; c++) begin
      @(negedge clk); bus_valid = 1; bus_we = 1; bus_addr = 20'h20000 | 20'(c << 11) | 20'(4 * 17); bus_wdata = 32'hCAFE;
      #1;
      for (int x = 0; x < 4; x++) chk(spm_we[x] == (x == c), "SPM write strobe decode");
      chk(spm_addr == 17 && spm_wdata == 32'hCAFE, "SPM address");
      @(negedge clk); bus_valid = 0; bus_we = 0;
      rdt(20'h20000 | 20'(c << 11) | 20'(4 * 33)); chk(rv == {8'(c), 15'd0, 9'd33}, "SPM read mux");
    end
    for (int i = 0; i < 16; i++) begin rdt(20'h00100 + 20'(4*i)); chk(rv == 32'h1000 + i, "STAT window"); end
    for (int k = 0; k < 4; k++) begin
      logic [31:0] e;
      for (int j = 0; j < 8; j++) e[4*j +: 4] = perm[8*k + j];
      rdt(20'h00200 + 20'(4*k)); chk(rv == e, "PERM window");
    end
    for (int p = 0; p < 8; p++) begin rdt(20'h00280 + 20'(4*p)); chk(rv == p * 3, "tracker count window"); end
    rdt(20'h10000 | (5 << 9) | (9 << 3)); chk(rv == {13'd0, 3'd5, 6'd9, 10'h155}, "tracker sample address");
    rdt(20'h10000 | (5 << 9) | (9 << 3) | 4); chk(rv == {7'd0, 3'd5, 6'd9}, "tracker sample time");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
