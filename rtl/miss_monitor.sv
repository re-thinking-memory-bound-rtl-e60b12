// miss_monitor: the hardware monitor that watches the L1 miss rate
// (paper Sec. 3.4 and its reconfiguration figure: TR -> Monitor -> Tracker).
//
// It counts the misses of all L1 caches over consecutive windows of
// `window` cycles. The paper's "Time Miss Rate" is misses divided by the
// window length, so comparing the miss count of a window with the threshold
// register is the same test with the division left out. When a window ends
// with more misses than `threshold`, `trigger` pulses for one cycle to start
// the tracker. `last_misses` holds the count of the last complete window.
// Window mechanics (back-to-back fixed windows) are this design's choice.
module miss_monitor #(
  parameter int N_SRC = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             enable,
  input  logic [31:0]      threshold,
  input  logic [31:0]      window,
  input  logic [N_SRC-1:0] miss,
  output logic             trigger,
  output logic [31:0]      last_misses
);
  logic [31:0] cyc_q, cnt_q;
  logic [31:0] cnt_d;
  always_comb begin
    cnt_d = cnt_q;
    for (int i = 0; i < N_SRC; i++) cnt_d += {31'd0, miss[i]};
  end

  logic win_end;
  assign win_end = enable && (cyc_q + 1 >= window);
  assign trigger = win_end && (cnt_d > threshold);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc_q       <= '0;
      cnt_q       <= '0;
      last_misses <= '0;
    end else if (!enable) begin
      cyc_q <= '0;
      cnt_q <= '0;
    end else if (win_end) begin
      cyc_q       <= '0;
      cnt_q       <= '0;
      last_misses <= cnt_d;
    end else begin
      cyc_q <= cyc_q + 1;
      cnt_q <= cnt_d;
    end
  end
endmodule
