// tb_pe_config_mem: writes random contexts into the PE configuration memory
// and checks the combinational read port against a shadow copy; also checks
// that reset clears every context.
//
// Timing: writes take effect on the rising edge; the read port is combinational.
// One word per context follows the paper's PE figure; 8 contexts and the
// 128-bit word are own choices.
`timescale 1ns/1ps
module tb_pe_config_mem;
  import cgra_pkg::*;
  localparam int N_CTX = 8;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [2:0] wr_ctx = 0, rd_ctx = 0;
  cfg_word_t wr_word = '0, rd_word;
  logic [127:0] shadow [N_CTX];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  pe_config_mem #(.N_CTX(N_CTX)) dut (.*);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < N_CTX; c++) begin
      rd_ctx = 3'(c); #1; checks++;
      if (rd_word !== '0) begin failures++; $display("FAIL: ctx %0d not reset", c); end
      shadow[c] = '0;
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      wr_en = $urandom % 2;
      wr_ctx = 3'($urandom);
      wr_word = {$urandom, $urandom, $urandom, $urandom};
      rd_ctx = 3'($urandom);
      #1; checks++;
      if (rd_word !== shadow[rd_ctx]) begin failures++; $display("FAIL: ctx %0d read %h exp %h", rd_ctx, rd_word, shadow[rd_ctx]); end
      @(posedge clk);
      if (wr_en) shadow[wr_ctx] = wr_word;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
