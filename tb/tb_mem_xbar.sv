// tb_mem_xbar: memory crossbar of one virtual SPM with its SPM and
// temporary store, against a behavioural L1 (lines not yet present miss
// once, get an MSHR number and are filled 20 cycles later). Directed
// sequences check: SPM loads/stores from both ports, sequential arbitration
// (contention when both ports need the same resource), L1 hits, a load miss
// waiting for fill_done of its MSHR then retrying, and every runahead rule:
// waits turned into dummy results on entry, dummy-address requests dropped,
// dummy-data stores dropped, valid stores kept in the temporary store (never
// in SPM or L1) and turned into prefetches for cache addresses, loads served
// from the temporary store, cache misses answered with dummy values, and the
// temporary store emptied by restore.
`timescale 1ns/1ps
module tb_mem_xbar;
  import cgra_pkg::*;
  logic clk = 0, rst_n = 0, ra_mode = 0, enter_ra = 0, restore = 0, fire = 0;
  mem_req_t req [2];
  word_t rdata [2];
  logic all_done, wait_any, contention, host_we = 0;
  logic [3:0] wait_mshr;
  logic [8:0] host_addr = 0;
  logic [31:0] host_wdata = 0, host_rdata;
  logic l1_req_valid, l1_req_port, l1_hit, l1_miss, l1_retry, l1_fill_done;
  acc_e l1_req_kind;
  logic [31:0] l1_req_addr, l1_req_wdata, l1_rdata;
  logic [3:0] l1_mshr, l1_fill_mshr;
  always #5 clk = ~clk;
  mem_xbar dut (.*);

  int checks = 0, failures = 0, n_cont = 0, n_pf = 0, n_st = 0;
  task automatic chk(bit ok, string m);
    checks++; if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", m); end
  endtask

  // behavioural L1: present lines hit; others miss, filled 20 cycles later
  bit present [logic [26:0]];
  logic [31:0] l1mem [logic [31:0]];
  int fill_t [$]; logic [26:0] fill_b [$]; logic [3:0] fill_m [$];
  logic [3:0] next_m = 0;
  int cyc = 0;
  always_comb begin
    l1_hit = 0; l1_miss = 0; l1_retry = 0; l1_rdata = 0; l1_mshr = next_m;
    if (l1_req_valid) begin
      if (present.exists(l1_req_addr[31:5])) begin
        l1_hit = 1;
        l1_rdata = l1mem.exists(l1_req_addr) ? l1mem[l1_req_addr] : ~l1_req_addr;
      end else l1_miss = 1;
    end
  end
  always @(posedge clk) begin
    cyc++;
    l1_fill_done <= 0;
    if (l1_req_valid) begin
      if (l1_req_kind == ACC_PREFETCH) n_pf++;
      if (l1_req_kind == ACC_STORE) begin n_st++; if (l1_hit) l1mem[l1_req_addr] = l1_req_wdata; end
      if (l1_miss) begin
        fill_t.push_back(cyc + 20); fill_b.push_back(l1_req_addr[31:5]); fill_m.push_back(next_m);
        next_m <= next_m + 1;
      end
    end
    if (fill_t.size() > 0 && fill_t[0] <= cyc) begin
      present[fill_b[0]] = 1;
      l1_fill_done <= 1; l1_fill_mshr <= fill_m[0];
      void'(fill_t.pop_front()); void'(fill_b.pop_front()); void'(fill_m.pop_front());
    end
    if (contention) n_cont++;
  end

  function automatic mem_req_t mk(bit v, bit we, logic [31:0] a, logic [31:0] d, bit ad = 0, bit dd = 0);
    mem_req_t r;
    r.valid = v; r.we = we; r.addr = a; r.wdata = d; r.addr_dmy = ad; r.data_dmy = dd;
    return r;
  endfunction

  // present requests, wait until all done (bounded), fire; returns cycles
  task automatic run_ctx(mem_req_t r0, mem_req_t r1, output word_t d0, output word_t d1, output int ncyc);
    @(negedge clk);
    req[0] = r0; req[1] = r1; ncyc = 0;
    #1;
    while (!all_done && ncyc < 200) begin @(negedge clk); ncyc++; #1; end
    d0 = rdata[0]; d1 = rdata[1];
    fire = 1; @(negedge clk); fire = 0;
    req[0] = mk(0, 0, 0, 0); req[1] = mk(0, 0, 0, 0);
  endtask

  initial begin
    word_t d0, d1; int n;
    req[0] = mk(0, 0, 0, 0); req[1] = mk(0, 0, 0, 0);
    l1_fill_done = 0; l1_fill_mshr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // --- normal mode
    run_ctx(mk(1, 1, 32'h10, 32'hAAAA_0001), mk(1, 1, 32'h20, 32'hBBBB_0002), d0, d1, n);
    chk(n == 1, $sformatf("two SPM stores serialised: %0d extra cycles", n));
    chk(n_cont > 0, "contention flagged");
    run_ctx(mk(1, 0, 32'h10, 0), mk(1, 0, 32'h20, 0), d0, d1, n);
    chk(d0 == '{dmy: 0, v: 32'hAAAA_0001} && d1 == '{dmy: 0, v: 32'hBBBB_0002}, "SPM loads");
    host_addr = 9'h4; #1 chk(host_rdata == 32'hAAAA_0001, "host reads SPM");
    present[27'(32'h0001_0000 >> 5)] = 1;
    run_ctx(mk(1, 0, 32'h0001_0004, 0), mk(1, 0, 32'h30, 0), d0, d1, n);
    chk(n == 0 && d0 == '{dmy: 0, v: ~32'h0001_0004}, "L1 hit and SPM in parallel");
    // load miss: waits, then hits after the fill
    fork
      run_ctx(mk(1, 0, 32'h0002_0008, 0), mk(0, 0, 0, 0), d0, d1, n);
      begin
        repeat (3) @(negedge clk);
        chk(wait_any && wait_mshr == next_m - 1'b1, "waiting on its MSHR");
      end
    join
    chk(n >= 20 && d0 == '{dmy: 0, v: ~32'h0002_0008}, $sformatf("load miss completes after fill (%0d cycles)", n));
    // --- runahead entry while waiting
    fork
      begin
        @(negedge clk); req[1] = mk(1, 0, 32'h0003_0000, 0);
        repeat (4) @(negedge clk);
        chk(wait_any, "waiting before runahead");
        enter_ra = 1; @(negedge clk); enter_ra = 0; ra_mode = 1;
        #1 chk(all_done && rdata[1].dmy, "wait turned into dummy on entry");
        fire = 1; @(negedge clk); fire = 0; req[1] = mk(0, 0, 0, 0);
      end
    join
    // runahead rules
    begin
      int pf0, st0;
      pf0 = n_pf; st0 = n_st;
      run_ctx(mk(1, 1, 32'h40, 32'h1234, 0, 1), mk(1, 0, 32'h44, 0, 1, 0), d0, d1, n);
      chk(d1.dmy, "dummy-address load returns dummy");
      chk(dut.u_spm.mem_q[16] != 32'h1234, "dummy-data store dropped");
      run_ctx(mk(1, 1, 32'h10, 32'h5555), mk(1, 1, 32'h0005_0000, 32'h6666), d0, d1, n);
      chk(dut.u_spm.mem_q[4] == 32'hAAAA_0001, "runahead store kept out of the SPM");
      chk(n_pf == pf0 + 1 && n_st == st0, "cache-address runahead store became a prefetch");
      run_ctx(mk(1, 0, 32'h10, 0), mk(1, 0, 32'h0005_0000, 0), d0, d1, n);
      chk(d0 == '{dmy: 0, v: 32'h5555}, "runahead load served by the temporary store");
      chk(d1 == '{dmy: 0, v: 32'h6666}, "second runahead load served by the temporary store");
      run_ctx(mk(1, 0, 32'h0007_0000, 0), mk(0, 0, 0, 0), d0, d1, n);
      chk(n == 0 && d0.dmy, "runahead cache miss answered with a dummy value");
    end
    // restore: temporary store cleared
    @(negedge clk); restore = 1; ra_mode = 0; @(negedge clk); restore = 0;
    run_ctx(mk(1, 0, 32'h10, 0), mk(0, 0, 0, 0), d0, d1, n);
    chk(d0 == '{dmy: 0, v: 32'hAAAA_0001}, "after restore the SPM value is visible again");
    // random normal-mode SPM traffic against a shadow
    begin
      logic [31:0] sh [512];
      for (int i = 0; i < 512; i++) sh[i] = dut.u_spm.mem_q[i];
      for (int k = 0; k < 500; k++) begin
        logic [8:0] a0, a1; bit w0, w1; logic [31:0] v0, v1;
        a0 = 9'($urandom); a1 = 9'($urandom); w0 = $urandom % 2; w1 = $urandom % 2; v0 = $urandom; v1 = $urandom;
        if (a0 == a1) w1 = 0;
        run_ctx(mk(1, w0, {21'd0, a0, 2'd0}, v0), mk(1, w1, {21'd0, a1, 2'd0}, v1), d0, d1, n);
        if (!w0) chk(d0.v == sh[a0], "random SPM load port 0");
        if (!w1) chk(d1.v == ((w0 && a0 == a1) ? v0 : sh[a1]), "random SPM load port 1");
        if (w0) sh[a0] = v0;
        if (w1) sh[a1] = v1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
