// tb_cgra_top: end-to-end test of the whole accelerator at its default size
// (8x8 array, 4 virtual SPMs, 32-way L1 pool, 128 KB L2).
//
// Kernel (an indirect gather-and-accumulate, the core of a GCN feature
// aggregation): for k = 0..N-1, sum += feature[idx[k]], written to SPM 1
// word 0 every iteration, and the running sum also stored to a regular
// output stream out[k] in cached memory. idx[] and feature[] live in main
// memory (cached, irregular accesses into a 16 KB feature array); the host
// programs a 4-context schedule on six PEs through MMIO.
//
// Runs:
//   A  runahead off: the array stalls on every load miss.
//   B  runahead on : same result, fewer cycles, runahead entered and left,
//      dummy-addressed requests dropped, runahead stores kept in the
//      temporary store, stores converted to prefetches.
//   C  runahead on with the monitor enabled: the monitor fires, the tracker
//      samples and interrupts, the "software" here moves the 16 ways of the
//      idle L1 caches 2 and 3 to L1 0 and sets its line to 128 B; the
//      reconfiguration is applied while the kernel runs; result still right.
// Each run checks the final SPM sum against a model computed here.
`timescale 1ns/1ps
module tb_cgra_top;
  import cgra_pkg::*;

  localparam int N_IT      = 160;
  localparam logic [31:0] IDX_BASE  = 32'h0001_0000;
  localparam logic [31:0] FEAT_BASE = 32'h0010_0000;
  localparam logic [31:0] OUT_BASE  = 32'h0020_0000;
  localparam int NF        = 4096;     // feature entries (16 KB)

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        bus_valid = 0, bus_we = 0;
  logic [19:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic        irq;
  logic        mrd_valid, mrd_ready, mrs_valid, mrs_ready, mwr_valid, mwr_ready;
  logic [31:0] mrd_addr, mwr_addr;
  logic [3:0]  mrd_tag, mrs_tag;
  logic [L2_LINE_W-1:0] mrs_data, mwr_data;
  logic [PHYS_PER_L2-1:0] mwr_mask;
  int n_mem_rd, n_mem_wr;

  cgra_top dut (.*);

  main_memory_model #(.LATENCY(78), .QW(4)) u_mem (
    .clk, .rst_n, .mrd_valid, .mrd_addr, .mrd_tag, .mrd_ready, .mrs_valid, .mrs_tag, .mrs_data,
    .mrs_ready, .mwr_valid, .mwr_addr, .mwr_data, .mwr_mask, .mwr_ready,
    .n_reads(n_mem_rd), .n_writes(n_mem_wr)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------ mechanism counters
  int c_dummy_drop = 0, c_ts_write = 0, c_prefetch = 0, c_sb_merge = 0, c_wb = 0, c_cont = 0;
  int c_l2hit = 0, c_l2miss = 0, c_mshr_merge = 0;
  for (genvar x = 0; x < 4; x++) begin : g_cnt
    always @(posedge clk) if (rst_n) begin
      if (dut.g_vspm[x].u_xbar.ra_mode && |(dut.g_vspm[x].u_xbar.gnt & dut.g_vspm[x].u_xbar.immed))
        c_dummy_drop++;
      if (dut.g_vspm[x].u_xbar.ts_wr_en) c_ts_write++;
      if (dut.l1_req_valid[x] && dut.l1_req_kind[x] == ACC_PREFETCH) c_prefetch++;
      if (dut.g_vspm[x].u_l1.wr_en && dut.g_vspm[x].u_l1.cur_merged) c_sb_merge++;
      if (dut.wb_valid[x] && dut.wb_ready[x]) c_wb++;
      if (dut.contention[x]) c_cont++;
      if (dut.g_vspm[x].u_l1.resp_miss && dut.g_vspm[x].u_l1.ms_match) c_mshr_merge++;
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (dut.l2_hit) c_l2hit++;
    if (dut.l2_miss) c_l2miss++;
  end


  // ------------------------------------------------------------ host bus
  task automatic wr(input logic [19:0] a, input logic [31:0] d);
    @(negedge clk);
    bus_valid = 1; bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk);
    bus_valid = 0; bus_we = 0;
  endtask
  task automatic rd(input logic [19:0] a, output logic [31:0] d);
    @(negedge clk);
    bus_addr = a; bus_valid = 1; bus_we = 0;
    #1 d = bus_rdata;
    @(negedge clk);
    bus_valid = 0;
  endtask

  task automatic cfg(input int pe, input int ctx, input cfg_word_t w);
    logic [127:0] b;
    b = w;
    for (int k = 0; k < 4; k++) wr(20'h00080 + 20'(4*k), b[32*k +: 32]);
    wr(20'h00090, 32'((pe << 3) | ctx));
  endtask

  function automatic cfg_word_t nop();
    cfg_word_t w;
    w = '0;
    w.op = OP_NOP;
    w.sel_n = SRC_RES; w.sel_e = SRC_RES; w.sel_s = SRC_RES; w.sel_w = SRC_RES;
    return w;
  endfunction

  function automatic logic [31:0] mem_init(input logic [31:0] a);
    return u_mem.rd_word(a);
  endfunction

  // idx[k] = address of a pseudo-random feature entry
  task automatic preload_idx();
    for (int k = 0; k < N_IT; k++)
      u_mem.wmem[IDX_BASE + 32'(4*k)] = FEAT_BASE + 32'(4 * ($urandom % NF));
  endtask

  // program the 4-context schedule described in the header
  task automatic program_kernel();
    cfg_word_t w;
    for (int pe = 0; pe < 64; pe++) for (int c = 0; c < 4; c++) begin
      w = nop();
      unique case (pe)
        1, 25: begin                      // PE(0,1): idx offset +4, PE(3,1): out offset +256
          if (c == 0) begin w.sel_i1 = SRC_RES; w.sel_i2 = SRC_CONST; w.imm = (pe == 1) ? 4 : 256; w.opnd_we = 3'b011; end
          if (c == 1) w.op = OP_ADD;
        end
        0: begin                          // PE(0,0): idx[] loads
          if (c == 0) begin w.op = OP_LOAD; w.sel_i1 = SRC_IN_E; w.sel_i2 = SRC_CONST; w.imm = IDX_BASE; w.opnd_we = 3'b011; end
          if (c == 1) w.op = OP_OR;
          if (c == 2) begin w.sel_i1 = SRC_RES; w.opnd_we = 3'b001; end
        end
        8: begin                          // PE(1,0): feature[] loads
          if (c == 1) begin w.sel_i1 = SRC_IN_N; w.opnd_we = 3'b001; end
          if (c == 2) w.op = OP_LOAD;
        end
        16: begin                         // PE(2,0): accumulate, store sum to SPM word 0
          if (c == 3) begin w.sel_i1 = SRC_IN_N; w.sel_i2 = SRC_RES; w.opnd_we = 3'b011; end
          if (c == 0) w.op = OP_ADD;
          if (c == 1) begin w.sel_i1 = SRC_CONST; w.imm = 0; w.sel_i2 = SRC_RES; w.opnd_we = 3'b011; end
          if (c == 2) w.op = OP_STORE;
        end
        24: begin                         // PE(3,0): store stream out[k]
          if (c == 0) begin w.sel_i1 = SRC_RES; w.sel_i2 = SRC_IN_N; w.opnd_we = 3'b011; end
          if (c == 2) begin w.op = OP_STORE; w.sel_i1 = SRC_IN_E; w.sel_i2 = SRC_CONST; w.imm = OUT_BASE; w.opnd_we = 3'b011; end
          if (c == 3) w.op = OP_OR;
        end
        default: ;
      endcase
      cfg(pe, c, w);
    end
  endtask

  // expected SPM1[0] after N_IT iterations: sum of feature[b_k], k = 0..N_IT-2,
  // b_0 = SPM0[0] (preloaded with FEAT_BASE), b_k = idx[k-1]
  function automatic logic [31:0] expected_sum();
    logic [31:0] s, b;
    s = 0;
    for (int k = 0; k <= N_IT - 2; k++) begin
      b = (k == 0) ? FEAT_BASE : mem_init(IDX_BASE + 32'(4*(k-1)));
      s += mem_init(b);
    end
    return s;
  endfunction

  task automatic setup_and_run(input bit ra, input bit mon, output int cycles);
    logic [31:0] st;
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    program_kernel();
    wr(20'h20000, FEAT_BASE);              // SPM0[0]
    wr(20'h20800, 32'd0);                  // SPM1[0]
    wr(20'h0000C, 4);                      // CTX_LEN
    wr(20'h00010, 4 * N_IT);               // ITER_LIMIT
    if (mon) begin
      wr(20'h00014, 2);                    // TR
      wr(20'h00018, 256);                  // MON_WIN
      wr(20'h0001C, 512);                  // TRK_WIN
    end
    wr(20'h00000, {29'd0, mon, ra, 1'b1});
    cycles = 0;
    do begin
      rd(20'h0012C, st);
      cycles += 2;
      if (mon && irq) service_irq();
    end while (!st[0] && cycles < 400000);
    rd(20'h00104, st);
    cycles = int'(st);
  endtask

  // the reconfiguration "software": read the samples, move ways, set line size
  bit reconfigured;
  task automatic service_irq();
    logic [31:0] v, n0;
    rd(20'h00280, n0);
    check(n0 > 0, "tracker recorded accesses of PE 0");
    rd(20'h10000, v);
    check(v[31:16] == IDX_BASE[31:16] || v == FEAT_BASE || v[31:16] == 16'h0010 || v < 32'h800,
          "tracker sample is an address of PE 0's stream");
    wr(20'h00004, 32'h2);                  // clear irq
    if (!reconfigured) begin
      // ways 16..31 (L1 2 and 3) -> L1 0; L1 0 uses 128 B lines
      wr(20'h00048, 32'h0000_0000);
      wr(20'h0004C, 32'h0000_0000);
      wr(20'h00060, 32'b01_01_01_10);
      wr(20'h00004, 32'h1);                // apply
      reconfigured = 1;
    end
  endtask

  int cyc_a, cyc_b, cyc_c;
  logic [31:0] r, s0;
  initial begin
    logic [31:0] exp_sum;
    preload_idx();
    exp_sum = expected_sum();
    reconfigured = 0;

    // ---------------- run A
    setup_and_run(0, 0, cyc_a);
    rd(20'h20800, r);
    check(r == exp_sum, $sformatf("A: sum %h expected %h", r, exp_sum));
    rd(20'h0013C, s0);
    check(s0 > 0, "A: array stalled on misses with runahead off");
    rd(20'h0010C, s0);
    check(s0 == 0, "A: no runahead when disabled");
    rd(20'h00100, s0);
    check(s0 == 4 * N_IT, "A: fire count equals ITER_LIMIT");
    $display("run A (no runahead): %0d cycles", cyc_a);

    // ---------------- run B
    setup_and_run(1, 0, cyc_b);
    rd(20'h20800, r);
    check(r == exp_sum, $sformatf("B: sum %h expected %h", r, exp_sum));
    rd(20'h0010C, s0);
    check(s0 > 0, "B: runahead entered");
    $display("run B (runahead): %0d cycles, %0d runahead entries", cyc_b, s0);
    rd(20'h00138, s0);
    check(s0 > 0, "B: restores happened");
    check(cyc_b < cyc_a, $sformatf("B: runahead faster (%0d vs %0d)", cyc_b, cyc_a));

    // ---------------- run C
    setup_and_run(1, 1, cyc_c);
    rd(20'h20800, r);
    check(r == exp_sum, $sformatf("C: sum %h expected %h", r, exp_sum));
    rd(20'h00130, s0);
    check(s0 > 0, "C: monitor triggered the tracker");
    rd(20'h00134, s0);
    check(s0 == 1, "C: one reconfiguration applied");
    rd(20'h00208, s0);
    check(s0 == 0, "C: ways 16..23 now belong to L1 0");
    rd(20'h00200, s0);
    check(s0 == 0, "C: ways 0..7 still L1 0");
    check(dut.line_m[0] == 2'd2, "C: L1 0 line size is 128 B");
    $display("run C (runahead + reconfiguration): %0d cycles", cyc_c);

    // ---------------- mechanisms seen
    check(c_dummy_drop > 0,  $sformatf("dummy-dependent requests dropped: %0d", c_dummy_drop));
    check(c_ts_write > 0,    $sformatf("runahead stores to temporary store: %0d", c_ts_write));
    check(c_prefetch > 0,    $sformatf("runahead stores converted to prefetches: %0d", c_prefetch));
    check(c_sb_merge > 0,    $sformatf("store-buffer merges on refill: %0d", c_sb_merge));
    check(c_wb > 0,          $sformatf("L1 write-backs: %0d", c_wb));
    check(c_cont > 0,        $sformatf("crossbar contention cycles: %0d", c_cont));
    check(c_l2hit > 0,       $sformatf("L2 hits: %0d", c_l2hit));
    check(c_l2miss > 0,      $sformatf("L2 misses: %0d", c_l2miss));
    check(c_mshr_merge > 0,  $sformatf("MSHR merges: %0d", c_mshr_merge));
    $display("mechanisms: drop=%0d ts=%0d pf=%0d sbmerge=%0d wb=%0d cont=%0d l2hit=%0d l2miss=%0d mshrmerge=%0d",
             c_dummy_drop, c_ts_write, c_prefetch, c_sb_merge, c_wb, c_cont, c_l2hit, c_l2miss, c_mshr_merge);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
