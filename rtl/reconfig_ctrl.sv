// reconfig_ctrl: applies a new cache configuration (paper Sec. 3.4,
// "Reconfiguration Ctrl").
//
// Software writes the reconfiguration registers (a 4-bit owner per cache way
// and a line-size exponent m per L1 cache) and then `apply`. The controller
//   1. HOLD : asks the array to stop between contexts (`hold`) and waits until
//             runahead has ended, all MSHRs are empty and every L1 is idle;
//   2. FLUSH: tells each L1 to write back and invalidate the ways it owns
//             that are about to change owner, and waits for them;
//   3. WRITE: copies the owners into the way permission registers, one way
//             per cycle (a counter walks the ways), and the line sizes into
//             the line-size registers;
// then releases `hold`. Draining and flushing before a way changes hands is
// this design's choice (the paper only says the controller updates the
// permission registers); it keeps dirty data from being stranded in a way
// that another virtual SPM now owns.
module reconfig_ctrl #(
  parameter int N_WAYS = 32,
  parameter int N_CTRL = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      apply,
  input  logic [3:0]                rr_perm [N_WAYS],
  input  logic [1:0]                rr_m    [N_CTRL],
  input  logic [3:0]                perm    [N_WAYS],
  input  logic                      ra_mode,
  input  logic                      l1_idle [N_CTRL],   // mshr empty and not busy
  output logic                      hold,
  output logic                      busy,
  output logic                      flush_start [N_CTRL],
  output logic [N_WAYS-1:0]         flush_mask  [N_CTRL],
  output logic                      perm_we,
  output logic [$clog2(N_WAYS)-1:0] perm_way,
  output logic [3:0]                perm_val,
  output logic [1:0]                line_m  [N_CTRL]
);
  typedef enum logic [2:0] {R_IDLE, R_HOLD, R_FLUSH, R_FWAIT, R_WRITE} rstate_e;
  rstate_e st_q;
  logic [$clog2(N_WAYS)-1:0] wcnt_q;
  logic [1:0] m_q [N_CTRL];

  assign line_m = m_q;
  assign hold   = (st_q != R_IDLE);
  assign busy   = hold;

  logic all_idle;
  always_comb begin
    all_idle = 1'b1;
    for (int c = 0; c < N_CTRL; c++) all_idle &= l1_idle[c];
  end

  always_comb begin
    for (int c = 0; c < N_CTRL; c++) begin
      flush_start[c] = (st_q == R_FLUSH);
      for (int w = 0; w < N_WAYS; w++)
        flush_mask[c][w] = (perm[w] == 4'(c)) && (rr_perm[w] != perm[w] || rr_m[c] != m_q[c]);
    end
  end

  assign perm_we  = (st_q == R_WRITE);
  assign perm_way = wcnt_q;
  assign perm_val = rr_perm[wcnt_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q   <= R_IDLE;
      wcnt_q <= '0;
      for (int c = 0; c < N_CTRL; c++) m_q[c] <= 2'd1;   // 64 B lines
    end else begin
      unique case (st_q)
        R_IDLE:  if (apply) st_q <= R_HOLD;
        R_HOLD:  if (!ra_mode && all_idle) st_q <= R_FLUSH;
        R_FLUSH: st_q <= R_FWAIT;
        R_FWAIT: if (all_idle) begin
          st_q   <= R_WRITE;
          wcnt_q <= '0;
        end
        R_WRITE: begin
          if (wcnt_q == ($clog2(N_WAYS))'(N_WAYS-1)) begin
            st_q <= R_IDLE;
            for (int c = 0; c < N_CTRL; c++) m_q[c] <= rr_m[c];
          end else wcnt_q <= wcnt_q + 1'b1;
        end
        default: st_q <= R_IDLE;
      endcase
    end
  end
endmodule
