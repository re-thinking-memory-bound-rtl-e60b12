// runahead_ctrl: the normal / runahead state machine of the array
// (paper Sec. 3.2, Fig. 3b).
//
// NORMAL: when runahead is enabled and a memory crossbar reports a load that
// waits on an L1 miss, the controller records that miss (crossbar and MSHR
// index) as the trigger, pulses `save` (all PE state and the context counter
// go to the backup registers) and `enter_ra`, and switches to RUNAHEAD.
// With runahead disabled the array just stalls until the line returns.
// RUNAHEAD: the array keeps executing with dummy values; when the L1 of the
// triggering crossbar reports the refill of the triggering MSHR, the
// controller pulses `restore` and returns to NORMAL, where the stalled
// context is executed again and now hits.
// `hold` (reconfiguration) keeps it from entering runahead.
// The counters report how often runahead was entered and how many cycles it
// lasted. Trigger selection (lowest crossbar) is this design's choice.
// rst_n is reported as both synchronous and asynchronous only because an
// assertion uses it in `disable iff`; all flip-flops reset asynchronously.
module runahead_ctrl #(
  parameter int N_X    = 4,
  parameter int MSHR_N = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      ra_en,
  input  logic                      hold,
  input  logic                      wait_any  [N_X],
  input  logic [$clog2(MSHR_N)-1:0] wait_mshr [N_X],
  input  logic                      fill_done [N_X],
  input  logic [$clog2(MSHR_N)-1:0] fill_mshr [N_X],
  output logic                      ra_mode,
  output logic                      save,
  output logic                      enter_ra,
  output logic                      restore,
  output logic [31:0]               n_entries,
  output logic [31:0]               n_ra_cycles
);
  localparam int XW = (N_X > 1) ? $clog2(N_X) : 1;
  localparam int MW = $clog2(MSHR_N);

  logic          ra_q;
  logic [XW-1:0] tx_q;
  logic [MW-1:0] tm_q;

  logic          any_wait;
  logic [XW-1:0] wx;
  always_comb begin
    any_wait = 1'b0;
    wx       = '0;
    for (int x = N_X-1; x >= 0; x--)
      if (wait_any[x]) begin
        any_wait = 1'b1;
        wx       = XW'(x);
      end
  end

  assign ra_mode  = ra_q;
  assign enter_ra = !ra_q && ra_en && !hold && any_wait;
  assign save     = enter_ra;
  assign restore  = ra_q && fill_done[tx_q] && fill_mshr[tx_q] == tm_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ra_q        <= 1'b0;
      tx_q        <= '0;
      tm_q        <= '0;
      n_entries   <= '0;
      n_ra_cycles <= '0;
    end else begin
      if (enter_ra) begin
        ra_q      <= 1'b1;
        tx_q      <= wx;
        tm_q      <= wait_mshr[wx];
        n_entries <= n_entries + 1;
      end else if (restore) begin
        ra_q <= 1'b0;
      end
      if (ra_q) n_ra_cycles <= n_ra_cycles + 1;
    end
  end

  a_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(save && restore));
endmodule
