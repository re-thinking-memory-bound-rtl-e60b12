// spm: scratchpad memory of one virtual SPM (one per memory crossbar).
//
// BYTES bytes organised as 32-bit words. One access port used by the memory
// crossbar (read data is combinational, i.e. the access completes in the
// cycle it is issued, matching the near-zero SPM latency the paper assumes)
// and one host port used to preload data and read results. The paper gives the size
// (2 KB per SPM in its Reconfig configuration); port structure and timing are
// this design's choices.
module spm #(
  parameter int BYTES = 2048
) (
  input  logic                           clk,
  input  logic                           en,
  input  logic                           we,
  input  logic [$clog2(BYTES/4)-1:0]     addr,
  input  logic [31:0]                    wdata,
  output logic [31:0]                    rdata,
  input  logic                           host_we,
  input  logic [$clog2(BYTES/4)-1:0]     host_addr,
  input  logic [31:0]                    host_wdata,
  output logic [31:0]                    host_rdata
);
  logic [31:0] mem_q [BYTES/4];

  always_ff @(posedge clk) begin
    if (en && we) mem_q[addr] <= wdata;
    if (host_we)  mem_q[host_addr] <= host_wdata;
  end

  assign rdata      = mem_q[addr];
  assign host_rdata = mem_q[host_addr];
endmodule
