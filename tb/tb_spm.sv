// tb_spm: random writes and reads through the crossbar port and the host
// port of a 2 KB scratchpad, compared with a shadow array.
//
// Timing: both ports write on the rising edge and read one cycle later. The
// 2 KB size follows the paper's configuration table; the host port is an own
// addition used to load data.
`timescale 1ns/1ps
module tb_spm;
  localparam int BYTES = 2048, AW = $clog2(BYTES/4);
  logic clk = 0, en = 0, we = 0, host_we = 0;
  logic [AW-1:0] addr = 0, host_addr = 0;
  logic [31:0] wdata = 0, host_wdata = 0, rdata, host_rdata;
  logic [31:0] shadow [BYTES/4];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  spm #(.BYTES(BYTES)) dut (.*);

  initial begin
    // fill everything through the host port first
    for (int i = 0; i < BYTES/4; i++) begin
      @(negedge clk); host_we = 1; host_addr = AW'(i); host_wdata = $urandom; shadow[i] = host_wdata;
    end
    @(negedge clk); host_we = 0;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      en = 1; we = $urandom % 3 == 0; addr = AW'($urandom); wdata = $urandom;
      host_we = $urandom % 5 == 0; host_addr = AW'($urandom); host_wdata = $urandom;
      if (host_we && host_addr == addr) host_addr = addr + 1'b1;
      #1;
      checks += 2;
      if (rdata !== shadow[addr]) begin failures++; $display("FAIL: rd %0d %h exp %h", addr, rdata, shadow[addr]); end
      if (host_rdata !== shadow[host_addr]) begin failures++; $display("FAIL: host rd %0d", host_addr); end
      @(posedge clk);
      if (en && we) shadow[addr] = wdata;
      if (host_we) shadow[host_addr] = host_wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
