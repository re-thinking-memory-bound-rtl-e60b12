// mmio_regs: memory-mapped host registers of the accelerator.
//
// The paper maps the threshold and reconfiguration registers into the host's
// address space and uses MMIO-based APIs to deploy new configurations; the
// rest of this map (control, configuration loading, SPM preload, statistics
// and sample read-out) is this design's choice. Single-cycle bus: a write
// takes effect at the clock edge, read data is combinational.
//
// Byte address map (20-bit):
//   0x00000 CTRL        rw  [0] run  [1] runahead enable  [2] monitor enable
//   0x00004 CMD         w   [0] apply reconfiguration  [1] clear tracker irq
//                           [2] restart (clear fire counter and statistics)
//   0x0000C CTX_LEN     rw  contexts in the modulo schedule (1..N_CTX)
//   0x00010 ITER_LIMIT  rw  number of array cycles (fires) to run
//   0x00014 TR          rw  miss threshold per monitor window
//   0x00018 MON_WIN     rw  monitor window, cycles
//   0x0001C TRK_WIN     rw  tracker observation window, cycles
//   0x00040+4k RR_PERM  rw  owners of ways 8k..8k+7, 4 bits each (k = 0..N_WAYS/8-1)
//   0x00060 RR_LINE     rw  line-size exponent m of L1 cache c in bits [2c+1:2c]
//   0x00080+4k CFG_STG  w   configuration word staging, bits [32k+31:32k], k = 0..3
//   0x00090 CFG_COMMIT  w   write staged word to PE wdata[13:3], context wdata[2:0]
//   0x00100+4i STAT     r   stat[i] (see the top level for the list)
//   0x00200+4k PERM     r   current way owners, as RR_PERM
//   0x00280+4c TRK_CNT  r   number of samples of memory PE c
//   0x1xxxx  TRK        r   sample of PE addr[13:9], index addr[8:3]; addr[2]=0 address, 1 time
//   0x2xxxx  SPM        rw  SPM addr[14:11] word addr[10:2] (preload, read-back)
module mmio_regs
  import cgra_pkg::*;
#(
  parameter int N_WAYS    = 32,
  parameter int N_CTRL    = 4,
  parameter int N_MPE     = 8,
  parameter int N_PE      = 64,
  parameter int N_CTX     = 8,
  parameter int TRK_DEPTH = 64,
  parameter int N_STAT    = 16,
  parameter int SPM_BYTES = 2048
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         bus_valid,
  input  logic                         bus_we,
  input  logic [19:0]                  bus_addr,
  input  logic [31:0]                  bus_wdata,
  output logic [31:0]                  bus_rdata,
  // control
  output logic                         run,
  output logic                         ra_en,
  output logic                         mon_en,
  output logic                         apply,
  output logic                         irq_clr,
  output logic                         restart,
  output logic [$clog2(N_CTX):0]       ctx_len,
  output logic [31:0]                  iter_limit,
  output logic [31:0]                  tr,
  output logic [31:0]                  mon_win,
  output logic [31:0]                  trk_win,
  output logic [3:0]                   rr_perm [N_WAYS],
  output logic [1:0]                   rr_m    [N_CTRL],
  // configuration memory load
  output logic                         cfg_we,
  output logic [$clog2(N_PE)-1:0]      cfg_pe,
  output logic [$clog2(N_CTX)-1:0]     cfg_ctx,
  output cfg_word_t                    cfg_word,
  // SPM preload
  output logic                         spm_we [N_CTRL],
  output logic [$clog2(SPM_BYTES/4)-1:0] spm_addr,
  output logic [31:0]                  spm_wdata,
  input  logic [31:0]                  spm_rdata [N_CTRL],
  // status
  input  logic [31:0]                  stat    [N_STAT],
  input  logic [3:0]                   perm    [N_WAYS],
  output logic [$clog2(N_MPE)-1:0]     trk_pe,
  output logic [$clog2(TRK_DEPTH)-1:0] trk_idx,
  input  logic [31:0]                  trk_addr,
  input  logic [15:0]                  trk_time,
  input  logic [$clog2(TRK_DEPTH):0]   trk_cnt [N_MPE]
);
  logic [2:0]   ctrl_q;
  logic [127:0] stg_q;

  assign run    = ctrl_q[0];
  assign ra_en  = ctrl_q[1];
  assign mon_en = ctrl_q[2];
  assign cfg_word = cfg_word_t'(stg_q);

  logic wr;
  assign wr = bus_valid && bus_we;

  assign apply   = wr && bus_addr == 20'h00004 && bus_wdata[0];
  assign irq_clr = wr && bus_addr == 20'h00004 && bus_wdata[1];
  assign restart = wr && bus_addr == 20'h00004 && bus_wdata[2];

  assign cfg_we  = wr && bus_addr == 20'h00090;
  assign cfg_pe  = bus_wdata[3 +: $clog2(N_PE)];
  assign cfg_ctx = bus_wdata[0 +: $clog2(N_CTX)];

  assign spm_addr  = bus_addr[2 +: $clog2(SPM_BYTES/4)];
  assign spm_wdata = bus_wdata;
  always_comb
    for (int c = 0; c < N_CTRL; c++)
      spm_we[c] = wr && bus_addr[19:16] == 4'h2 && bus_addr[14:11] == 4'(c);

  assign trk_pe  = bus_addr[9 +: $clog2(N_MPE)];
  assign trk_idx = bus_addr[3 +: $clog2(TRK_DEPTH)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl_q     <= '0;
      stg_q      <= '0;
      ctx_len    <= ($clog2(N_CTX)+1)'(1);
      iter_limit <= '0;
      tr         <= 32'd16;
      mon_win    <= 32'd1024;
      trk_win    <= 32'd1024;
      for (int w = 0; w < N_WAYS; w++) rr_perm[w] <= 4'(w / (N_WAYS / N_CTRL));
      for (int c = 0; c < N_CTRL; c++) rr_m[c] <= 2'd1;
    end else if (wr) begin
      unique casez (bus_addr)
        20'h00000: ctrl_q     <= bus_wdata[2:0];
        20'h0000C: ctx_len    <= bus_wdata[$clog2(N_CTX):0];
        20'h00010: iter_limit <= bus_wdata;
        20'h00014: tr         <= bus_wdata;
        20'h00018: mon_win    <= bus_wdata;
        20'h0001C: trk_win    <= bus_wdata;
        20'h00060: for (int c = 0; c < N_CTRL; c++) rr_m[c] <= bus_wdata[2*c +: 2];
        20'h0004?: for (int j = 0; j < 8; j++)
                     if (bus_addr[3:2]*8 + j < N_WAYS) rr_perm[bus_addr[3:2]*8 + j] <= bus_wdata[4*j +: 4];
        20'h0008?: stg_q[bus_addr[3:2]*32 +: 32] <= bus_wdata;
        default: ;
      endcase
    end
  end

  always_comb begin
    bus_rdata = '0;
    if (bus_addr[19:16] == 4'h1) begin
      bus_rdata = bus_addr[2] ? {16'd0, trk_time} : trk_addr;
    end else if (bus_addr[19:16] == 4'h2) begin
      for (int c = 0; c < N_CTRL; c++) if (bus_addr[14:11] == 4'(c)) bus_rdata = spm_rdata[c];
    end else begin
      unique casez (bus_addr)
        20'h00000: bus_rdata = {29'd0, ctrl_q};
        20'h0000C: bus_rdata = 32'(ctx_len);
        20'h00010: bus_rdata = iter_limit;
        20'h00014: bus_rdata = tr;
        20'h00018: bus_rdata = mon_win;
        20'h0001C: bus_rdata = trk_win;
        20'h00060: for (int c = 0; c < N_CTRL; c++) bus_rdata[2*c +: 2] = rr_m[c];
        20'h0004?: for (int j = 0; j < 8; j++)
                     if (bus_addr[3:2]*8 + j < N_WAYS) bus_rdata[4*j +: 4] = rr_perm[bus_addr[3:2]*8 + j];
        20'h001??: if (32'(bus_addr[7:2]) < N_STAT) bus_rdata = stat[bus_addr[5:2]];
        20'h0020?: for (int j = 0; j < 8; j++)
                     if (bus_addr[3:2]*8 + j < N_WAYS) bus_rdata[4*j +: 4] = perm[bus_addr[3:2]*8 + j];
        20'h0028?, 20'h0029?: if (32'(bus_addr[4:2]) < N_MPE) bus_rdata = 32'(trk_cnt[bus_addr[4:2]]);
        default: ;
      endcase
    end
  end
endmodule
