// mem_xbar: memory crossbar of one virtual SPM, shared by two border PEs.
//
// Together with its SPM and its L1 controller it forms one "virtual SPM"
// (paper Sec. 3.3): the compiler partitions data between virtual SPMs, so
// each PE pair only ever reaches its own. Addresses below SPM_BYTES go to
// the local SPM; all others go through the L1 cache (this address split is
// this design's choice).
//
// The array presents one request per port and holds it until it fires.
// The crossbar completes each port's request once and keeps the result until
// `fire`; `all_done` tells the array that every valid request of the current
// context is complete (combinationally including the ones completing now).
// Per cycle the SPM, the L1 and the temporary store each serve one port;
// port 0 is served first, so two requests for the same resource take two
// cycles and the array stalls meanwhile (the paper's sequential arbitration).
//
// Normal mode: SPM and cache accesses as usual. A load that misses in the L1
// waits (`wait_any`, with its MSHR in `wait_mshr`) until the L1 reports the
// refill of that MSHR and then asks again.
//
// Runahead mode (paper Sec. 3.2):
//   * a request whose address depends on a dummy value is dropped; a load
//     then returns a dummy value;
//   * a store whose data is dummy is dropped;
//   * a valid store goes to the temporary store (never to SPM or cache); if
//     its address is a cache address it also becomes a prefetch read;
//   * a load looks in the temporary store first, then SPM or cache; a cache
//     miss (or a full MSHR file) returns a dummy value and leaves the
//     prefetch in flight.
// `enter_ra` turns the waiting loads into dummy results; `restore` forgets
// all completed requests so the restored context is executed again, and
// empties the temporary store.
// rst_n is reported as both synchronous and asynchronous only because an
// assertion uses it in `disable iff`; all flip-flops reset asynchronously.
module mem_xbar
  import cgra_pkg::*;
#(
  parameter int SPM_BYTES = 2048,
  parameter int TS_N      = 16,
  parameter int MSHR_N    = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      ra_mode,
  input  logic                      enter_ra,
  input  logic                      restore,
  input  logic                      fire,
  input  mem_req_t                  req   [2],
  output word_t                     rdata [2],
  output logic                      all_done,
  output logic                      wait_any,
  output logic [$clog2(MSHR_N)-1:0] wait_mshr,
  output logic                      contention,   // a port lost arbitration this cycle
  // host access to the SPM (preload, result read-back)
  input  logic                      host_we,
  input  logic [$clog2(SPM_BYTES/4)-1:0] host_addr,
  input  logic [31:0]               host_wdata,
  output logic [31:0]               host_rdata,
  // L1 controller
  output logic                      l1_req_valid,
  output acc_e                      l1_req_kind,
  output logic [31:0]               l1_req_addr,
  output logic [31:0]               l1_req_wdata,
  output logic                      l1_req_port,
  input  logic                      l1_hit,
  input  logic [31:0]               l1_rdata,
  input  logic                      l1_miss,
  input  logic                      l1_retry,
  input  logic [$clog2(MSHR_N)-1:0] l1_mshr,
  input  logic                      l1_fill_done,
  input  logic [$clog2(MSHR_N)-1:0] l1_fill_mshr
);
  localparam int SAW = $clog2(SPM_BYTES / 4);
  localparam int MW  = $clog2(MSHR_N);

  logic [1:0]  done_q, wait_q;
  word_t       data_q [2];
  logic [MW-1:0] wmshr_q [2];

  // resources a port needs
  typedef struct packed {logic spm; logic l1; logic ts;} res_t;

  res_t        need [2];
  logic [1:0]  pend, immed;
  word_t       imm_data [2];
  logic [1:0]  is_spm;

  // temporary store (runahead writes)
  logic        ts_wr_en, ts_hit;
  logic [31:0] ts_wr_addr, ts_wr_data, ts_rd_addr, ts_rd_data;
  // lookups for both ports: the store is tiny, so a second read port is
  // provided by instantiating the lookup logic per port through rd_addr mux
  logic [1:0]  ts_hit_p;
  logic [31:0] ts_data_p [2];

  ra_temp_store #(.ENTRIES(TS_N)) u_ts (
    .clk, .rst_n, .clear(restore), .wr_en(ts_wr_en), .wr_addr(ts_wr_addr), .wr_data(ts_wr_data),
    .rd_addr(ts_rd_addr), .rd_hit(ts_hit), .rd_data(ts_rd_data)
  );

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      pend[p]     = req[p].valid && !done_q[p] && !wait_q[p];
      is_spm[p]   = req[p].addr < 32'(SPM_BYTES);
      need[p]     = '0;
      immed[p]    = 1'b0;
      imm_data[p] = '{dmy: 1'b1, v: 32'd0};
      if (ra_mode && req[p].addr_dmy) begin
        immed[p] = 1'b1;                                   // dropped, dummy result
      end else if (ra_mode && req[p].we) begin
        if (req[p].data_dmy) immed[p] = 1'b1;              // invalid store dropped
        else begin
          need[p].ts = 1'b1;
          need[p].l1 = !is_spm[p];                         // store becomes a prefetch
        end
      end else if (is_spm[p]) begin
        need[p].spm = 1'b1;
      end else begin
        need[p].l1 = 1'b1;
      end
    end
  end

  // runahead loads look in the temporary store; only one lookup port, so the
  // lookup follows the port chosen below (port 0 first)
  logic [1:0] gnt;
  always_comb begin
    gnt = '0;
    if (pend[0]) gnt[0] = 1'b1;
    if (pend[1]) begin
      if (!gnt[0] || immed[0] || immed[1] ||
          !((need[0].spm & need[1].spm) | (need[0].l1 & need[1].l1) | (need[0].ts & need[1].ts)))
        gnt[1] = 1'b1;
    end
    // the single temporary-store lookup port goes to one runahead load
    if (ra_mode && gnt[0] && gnt[1] && !req[0].we && !req[1].we && !immed[0] && !immed[1])
      gnt[1] = 1'b0;
  end
  assign contention = pend[1] && !gnt[1];

  logic lk_port;
  assign lk_port    = (gnt[0] && !req[0].we && !immed[0]) ? 1'b0 : 1'b1;
  assign ts_rd_addr = req[lk_port].addr;
  always_comb begin
    for (int p = 0; p < 2; p++) begin
      ts_hit_p[p]  = ra_mode && ts_hit && (lk_port == 1'(p));
      ts_data_p[p] = ts_rd_data;
    end
  end

  // SPM
  logic              spm_en, spm_we;
  logic [SAW-1:0]    spm_addr;
  logic [31:0]       spm_wdata, spm_rdata;
  logic              spm_port;
  assign spm_port  = (gnt[0] && need[0].spm && !immed[0]) ? 1'b0 : 1'b1;
  assign spm_addr  = req[spm_port].addr[2 +: SAW];
  assign spm_wdata = req[spm_port].wdata;
  assign spm_en    = gnt[spm_port] && need[spm_port].spm && !immed[spm_port] && !ts_hit_p[spm_port];
  assign spm_we    = spm_en && req[spm_port].we && !ra_mode;

  spm #(.BYTES(SPM_BYTES)) u_spm (
    .clk, .en(spm_en), .we(spm_we), .addr(spm_addr), .wdata(spm_wdata), .rdata(spm_rdata),
    .host_we, .host_addr, .host_wdata, .host_rdata
  );

  // L1
  logic l1_port;
  assign l1_port      = (gnt[0] && need[0].l1 && !immed[0]) ? 1'b0 : 1'b1;
  assign l1_req_valid = gnt[l1_port] && need[l1_port].l1 && !immed[l1_port] && !ts_hit_p[l1_port];
  assign l1_req_kind  = (ra_mode && req[l1_port].we) ? ACC_PREFETCH :
                        req[l1_port].we ? ACC_STORE : ACC_LOAD;
  assign l1_req_addr  = req[l1_port].addr;
  assign l1_req_wdata = req[l1_port].wdata;
  assign l1_req_port  = l1_port;

  // temporary-store write
  logic ts_port;
  assign ts_port    = (gnt[0] && need[0].ts && !immed[0]) ? 1'b0 : 1'b1;
  assign ts_wr_en   = gnt[ts_port] && need[ts_port].ts && !immed[ts_port];
  assign ts_wr_addr = req[ts_port].addr;
  assign ts_wr_data = req[ts_port].wdata;

  // completion of each port this cycle
  logic [1:0] done_now, wait_now;
  word_t      data_now [2];
  always_comb begin
    for (int p = 0; p < 2; p++) begin
      done_now[p] = 1'b0;
      wait_now[p] = 1'b0;
      data_now[p] = '0;
      if (gnt[p]) begin
        if (immed[p]) begin
          done_now[p] = 1'b1;
          data_now[p] = imm_data[p];
        end else if (ts_hit_p[p]) begin
          done_now[p] = 1'b1;
          data_now[p] = '{dmy: 1'b0, v: ts_data_p[p]};
        end else if (need[p].ts) begin
          // runahead store: temporary store written; prefetch result is irrelevant
          done_now[p] = 1'b1;
        end else if (need[p].spm) begin
          done_now[p] = 1'b1;
          data_now[p] = '{dmy: 1'b0, v: spm_rdata};
        end else begin
          if (l1_hit) begin
            done_now[p] = 1'b1;
            data_now[p] = '{dmy: 1'b0, v: l1_rdata};
          end else if (ra_mode && !req[p].we && (l1_miss || l1_retry)) begin
            done_now[p] = 1'b1;                         // dummy, prefetch in flight
            data_now[p] = '{dmy: 1'b1, v: 32'd0};
          end else if (l1_miss) begin
            if (req[p].we) done_now[p] = 1'b1;           // store miss is buffered
            else           wait_now[p] = 1'b1;
          end
        end
      end
    end
  end

  always_comb begin
    all_done = 1'b1;
    for (int p = 0; p < 2; p++) begin
      rdata[p] = done_q[p] ? data_q[p] : data_now[p];
      if (req[p].valid && !done_q[p] && !done_now[p]) all_done = 1'b0;
    end
  end

  always_comb begin
    wait_any  = 1'b0;
    wait_mshr = '0;
    for (int p = 1; p >= 0; p--)
      if (wait_q[p]) begin
        wait_any  = 1'b1;
        wait_mshr = wmshr_q[p];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done_q  <= '0;
      wait_q  <= '0;
      for (int p = 0; p < 2; p++) begin
        data_q[p]  <= '0;
        wmshr_q[p] <= '0;
      end
    end else if (restore || fire) begin
      done_q <= '0;
      wait_q <= '0;
    end else begin
      for (int p = 0; p < 2; p++) begin
        if (enter_ra && wait_q[p]) begin
          wait_q[p] <= 1'b0;
          done_q[p] <= 1'b1;
          data_q[p] <= '{dmy: 1'b1, v: 32'd0};
        end else if (wait_q[p] && l1_fill_done && l1_fill_mshr == wmshr_q[p]) begin
          wait_q[p] <= 1'b0;
        end else if (done_now[p]) begin
          done_q[p] <= 1'b1;
          data_q[p] <= data_now[p];
        end else if (wait_now[p]) begin
          wait_q[p]  <= 1'b1;
          wmshr_q[p] <= l1_mshr;
        end
      end
    end
  end

  a_one_l1_req: assert property (@(posedge clk) disable iff (!rst_n)
    l1_req_valid |-> !(gnt[0] && gnt[1] && need[0].l1 && need[1].l1 && !immed[0] && !immed[1]));
endmodule
