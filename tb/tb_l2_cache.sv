// tb_l2_cache: the shared 128 KB L2 with a main-memory model. Four clients
// issue random 128 B line reads and 32 B write-backs; responses are routed
// by client and MSHR tag and compared with a shadow memory. Also checks the
// hit latency (response 8 cycles after a request is accepted for a line
// already present), that misses go to memory, dirty evictions reach memory
// (masked writes), and that writes-backs that miss go straight to memory.
`timescale 1ns/1ps
module tb_l2_cache;
  import cgra_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rq_v [4], rq_r [4], wb_v [4], wb_r [4], rs_v [4], rs_r [4];
  logic [31:0] rq_a [4], wb_a [4];
  logic [3:0] rq_m [4];
  logic [PHYS_LINE_W-1:0] wb_d [4];
  logic [3:0] rs_m;
  logic [L2_LINE_W-1:0] rs_d;
  logic mrd_valid, mrd_ready, mrs_valid, mrs_ready, mwr_valid, mwr_ready, st_hit, st_miss;
  logic [31:0] mrd_addr, mwr_addr;
  logic [3:0] mrd_tag, mrs_tag;
  logic [L2_LINE_W-1:0] mrs_data, mwr_data;
  logic [PHYS_PER_L2-1:0] mwr_mask;
  int n_rd, n_wr;
  l2_cache dut (
    .clk, .rst_n, .req_valid(rq_v), .req_addr(rq_a), .req_mshr(rq_m), .req_ready(rq_r),
    .wb_valid(wb_v), .wb_addr(wb_a), .wb_data(wb_d), .wb_ready(wb_r),
    .resp_valid(rs_v), .resp_mshr(rs_m), .resp_data(rs_d), .resp_ready(rs_r),
    .mrd_valid, .mrd_addr, .mrd_tag, .mrd_ready, .mrs_valid, .mrs_tag, .mrs_data, .mrs_ready,
    .mwr_valid, .mwr_addr, .mwr_data, .mwr_mask, .mwr_ready, .stat_hit(st_hit), .stat_miss(st_miss)
  );
  main_memory_model #(.LATENCY(78), .QW(4)) u_mem (
    .clk, .rst_n, .mrd_valid, .mrd_addr, .mrd_tag, .mrd_ready, .mrs_valid, .mrs_tag, .mrs_data,
    .mrs_ready, .mwr_valid, .mwr_addr, .mwr_data, .mwr_mask, .mwr_ready, .n_reads(n_rd), .n_writes(n_wr)
  );

  int checks = 0, failures = 0, n_resp = 0, n_hits = 0, n_miss = 0;
  logic [31:0] shadow [logic [31:0]];
  function automatic logic [31:0] sh(logic [31:0] a);
    return shadow.exists(a) ? shadow[a] : u_mem.init_word(a);
  endfunction
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask
  always @(posedge clk) if (rst_n) begin
    if (st_hit) n_hits++;
    if (st_miss) n_miss++;
  end

  // outstanding request per client (one at a time per client, mshr = sequence)
  logic [31:0] out_a [4];
  bit out_v [4];
  int t_acc [4];
  int cyc = 0;
  always @(posedge clk) cyc++;

  // read a line from client c and wait for the response
  task automatic read_line(int c, logic [31:0] a, output int lat);
    @(negedge clk);
    rq_v[c] = 1; rq_a[c] = a; rq_m[c] = 4'($urandom);
    @(posedge clk);
    while (!rq_r[c]) @(posedge clk);
    t_acc[c] = cyc;
    @(negedge clk); rq_v[c] = 0;
    while (!rs_v[c]) @(negedge clk);
    lat = cyc - t_acc[c];
    chk(rs_m == rq_m[c], "response MSHR tag");
    for (int i = 0; i < 32; i++)
      chk(rs_d[32*i +: 32] == sh({a[31:7], 7'd0} + 32'(4*i)), $sformatf("client %0d line %h word %0d", c, a, i));
    n_resp++;
  endtask

  task automatic write_back(int c, logic [31:0] a);
    @(negedge clk);
    wb_v[c] = 1; wb_a[c] = {a[31:5], 5'd0};
    for (int i = 0; i < 8; i++) begin
      wb_d[c][32*i +: 32] = $urandom;
      shadow[{a[31:5], 5'd0} + 32'(4*i)] = wb_d[c][32*i +: 32];
    end
    @(posedge clk);
    while (!wb_r[c]) @(posedge clk);
    @(negedge clk); wb_v[c] = 0;
  endtask

  initial begin
    int lat;
    for (int c = 0; c < 4; c++) begin
      rq_v[c] = 0; rq_a[c] = 0; rq_m[c] = 0; wb_v[c] = 0; wb_a[c] = 0; wb_d[c] = 0; rs_r[c] = 1;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // latency: first access misses, second hits in exactly HIT_LAT cycles
    read_line(0, 32'h0010_0000, lat);
    chk(lat >= 78, $sformatf("miss latency %0d", lat));
    read_line(1, 32'h0010_0040, lat);
    chk(lat == 8, $sformatf("hit latency %0d (expected 8)", lat));
    // write-back that misses goes straight to memory
    begin
      int w0;
      w0 = n_wr;
      write_back(2, 32'h0300_0000);
      repeat (5) @(negedge clk);
      chk(n_wr > w0, "missing write-back forwarded to memory");
    end
    // random traffic from four clients, each in its own 512 KB region (the
    // virtual SPMs partition data, so clients never share lines)
    for (int c = 0; c < 4; c++) begin
      automatic int cc = c;
      fork
        for (int n = 0; n < 300; n++) begin
          logic [31:0] a;
          int l;
          a = 32'h0100_0000 + 32'(cc * 32'h0010_0000) + 32'(32 * ($urandom % ((n % 3 == 0) ? 16384 : 256)));
          if ($urandom % 3 == 0) write_back(cc, a);
          else read_line(cc, a, l);
        end
      join_none
    end
    wait fork;
    chk(n_hits > 0 && n_miss > 0, $sformatf("hits %0d misses %0d", n_hits, n_miss));
    $display("responses=%0d hits=%0d misses=%0d mem reads=%0d mem writes=%0d", n_resp, n_hits, n_miss, n_rd, n_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (2_000_000) @(posedge clk); $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
