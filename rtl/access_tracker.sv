// access_tracker: samples the memory accesses of every memory PE over an
// observation window (paper Sec. 3.4, "Tracker").
//
// A `trigger` from the monitor (ignored while a sample is in progress or not
// yet read) starts a window of `window` cycles. During it, every access a
// memory PE completes (acc_valid) is stored in that PE's own sample memory
// as {address, time since window start}; a PE's memory stops filling when
// it holds DEPTH samples. When the window closes `irq` is raised and held
// until `irq_clr`; software then reads the samples (rd_pe, rd_idx) and the
// per-PE counts, feeds them to its memory-subsystem model and the
// allocation algorithm, and writes the reconfiguration registers.
// Sample format and depth (64 per PE) are assumed; the paper leaves them open.
module access_tracker #(
  parameter int N_PE  = 8,
  parameter int DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     trigger,
  input  logic [31:0]              window,
  input  logic [N_PE-1:0]          acc_valid,
  input  logic [31:0]              acc_addr [N_PE],
  output logic                     active,
  output logic                     irq,
  input  logic                     irq_clr,
  input  logic [$clog2(N_PE)-1:0]  rd_pe,
  input  logic [$clog2(DEPTH)-1:0] rd_idx,
  output logic [31:0]              rd_addr,
  output logic [15:0]              rd_time,
  output logic [$clog2(DEPTH):0]   count [N_PE]
);
  localparam int DW = $clog2(DEPTH);
  logic [31:0] t_q;
  logic        act_q, irq_q;
  logic [DW:0] cnt_q [N_PE];
  logic [47:0] mem_q [N_PE][DEPTH];

  assign active = act_q;
  assign irq    = irq_q;
  assign count  = cnt_q;
  assign rd_addr = mem_q[rd_pe][rd_idx][31:0];
  assign rd_time = mem_q[rd_pe][rd_idx][47:32];

  always_ff @(posedge clk) begin
    for (int p = 0; p < N_PE; p++)
      if (act_q && acc_valid[p] && cnt_q[p] < (DW+1)'(DEPTH))
        mem_q[p][cnt_q[p][DW-1:0]] <= {t_q[15:0], acc_addr[p]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_q   <= '0;
      act_q <= 1'b0;
      irq_q <= 1'b0;
      for (int p = 0; p < N_PE; p++) cnt_q[p] <= '0;
    end else begin
      if (irq_clr) irq_q <= 1'b0;
      if (!act_q) begin
        if (trigger && !irq_q) begin
          act_q <= 1'b1;
          t_q   <= '0;
          for (int p = 0; p < N_PE; p++) cnt_q[p] <= '0;
        end
      end else begin
        t_q <= t_q + 1;
        for (int p = 0; p < N_PE; p++)
          if (acc_valid[p] && cnt_q[p] < (DW+1)'(DEPTH)) cnt_q[p] <= cnt_q[p] + 1'b1;
        if (t_q + 1 >= window) begin
          act_q <= 1'b0;
          irq_q <= 1'b1;
        end
      end
    end
  end
endmodule
