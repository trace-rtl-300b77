// plane_scheduler: the plane-aware DRAM scheduler (stage 4).
//
// Requests are 64-byte line reads or writes at device line addresses; a compressed
// plane of a block is 1..4 consecutive lines, so the requests of one plane stay in
// one DRAM row ("plane stripe").  Each request is queued in the FIFO of its bank
// (per-bank plane FIFOs).  Every cycle at most one DRAM command is issued:
//   * within a bank the oldest request that hits the open row is served first, else
//     the oldest request (row-buffer prioritisation, FR-FCFS);
//   * across banks, column commands to open rows win over ACT / PRE, round robin
//     among banks of the same class;
//   * a row miss precharges the open row (PRE), then activates (ACT), waits tRCD,
//     then issues the column command; column commands are at least BURST cycles
//     apart (data bus occupancy).
// The paper names the per-bank plane FIFOs and row-buffer prioritisation and gives
// the 10-cycle scheduling stage and tRCD = tCL = 27, burst = 4 cycles.  A request only
// becomes eligible SCHED_LAT - 1 cycles after it was queued, so an idle scheduler
// places the first command SCHED_LAT cycles after the request; tRP and the queue depth
// are this design's choices.
//
// Read data comes back from the DRAM (dram_rvalid / dram_rdata) in command order,
// tCL + BURST cycles after RD; the scheduler pairs it with the request tag and
// presents it on resp_*.  resp_* has no backpressure.
//
// Lint notes: Verilator reports rst_n as used both asynchronously and synchronously
// (SYNCASYNCNET).  The synchronous use is only the disable iff (!rst_n) of a
// concurrent assertion, which is not logic; every flip-flop resets asynchronously.
module plane_scheduler
  import trace_pkg::*;
#(
  parameter int unsigned DEPTH     = 8,
  parameter int unsigned SCHED_LAT = 10,
  parameter int unsigned T_RCD     = 27,
  parameter int unsigned T_RP      = 27,
  parameter int unsigned BURST     = 4,
  parameter int unsigned RTAG_W    = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // requests
  input  logic                 req_valid,
  output logic                 req_ready,
  input  logic                 req_write,
  input  logic [PADDR_W-1:0]   req_addr,
  input  logic [LINE_BITS-1:0] req_wdata,
  input  logic [RTAG_W-1:0]    req_tag,
  // read responses
  output logic                 resp_valid,
  output logic [RTAG_W-1:0]    resp_tag,
  output logic [LINE_BITS-1:0] resp_data,
  // DRAM command bus
  output logic                 dram_cmd_valid,
  output dram_cmd_e            dram_cmd,
  output logic [BANK_W-1:0]    dram_bank,
  output logic [ROW_W-1:0]     dram_row,
  output logic [COL_W-1:0]     dram_col,
  output logic [LINE_BITS-1:0] dram_wdata,
  input  logic                 dram_rvalid,
  input  logic [LINE_BITS-1:0] dram_rdata,
  // statistics
  output logic [31:0]          row_hits,
  output logic [31:0]          activates,
  output logic [31:0]          col_cmds
);

  localparam int unsigned QW = $clog2(DEPTH);
  localparam int unsigned OUTST = 32;

  typedef struct packed {
    logic                 write;
    logic [ROW_W-1:0]     row;
    logic [COL_W-1:0]     col;
    logic [RTAG_W-1:0]    tag;
    logic [31:0]          t_in;
  } qent_t;

  logic [31:0] now;
  qent_t                q    [NBANKS][DEPTH];
  logic [LINE_BITS-1:0] qd   [NBANKS][DEPTH];
  logic [DEPTH-1:0]     qv   [NBANKS];
  logic [NBANKS-1:0]    open_q;
  logic [ROW_W-1:0]     orow [NBANKS];
  logic [31:0]          rdy_at [NBANKS];
  logic [31:0]          bus_at;
  logic [BANK_W-1:0]    rr;
  logic [NBANKS-1:0]    fresh;   // row activated, no column command yet

  // outstanding read tags, in command order
  logic [RTAG_W-1:0]    otag [OUTST];
  logic [4:0]           o_wr, o_rd;

  // ---------------- enqueue ----------------
  logic [BANK_W-1:0] in_bank;
  logic              in_free_any;
  logic [QW-1:0]     in_free;
  assign in_bank = req_addr[COL_W +: BANK_W];
  always_comb begin
    in_free_any = 1'b0; in_free = '0;
    for (int e = DEPTH - 1; e >= 0; e--)
      if (!qv[in_bank][e]) begin in_free_any = 1'b1; in_free = QW'(e); end
  end
  assign req_ready = in_free_any;

  // ---------------- per-bank choice ----------------
  logic [NBANKS-1:0] b_has, b_hit;
  logic [QW-1:0]     b_sel [NBANKS];
  always_comb begin
    for (int b = 0; b < NBANKS; b++) begin
      logic [31:0] best_t, hit_t;
      logic        any, anyhit;
      logic [QW-1:0] best, hbest;
      any = 1'b0; anyhit = 1'b0; best = '0; hbest = '0; best_t = '0; hit_t = '0;
      for (int e = 0; e < DEPTH; e++) begin
        if (qv[b][e] && (now - q[b][e].t_in) >= 32'(SCHED_LAT - 1)) begin
          if (!any || (q[b][e].t_in < best_t)) begin
            any = 1'b1; best = QW'(e); best_t = q[b][e].t_in;
          end
          if (open_q[b] && orow[b] == q[b][e].row && (!anyhit || q[b][e].t_in < hit_t)) begin
            anyhit = 1'b1; hbest = QW'(e); hit_t = q[b][e].t_in;
          end
        end
      end
      b_has[b] = any && (now >= rdy_at[b]);
      b_hit[b] = anyhit;
      b_sel[b] = anyhit ? hbest : best;
    end
  end

  // ---------------- arbitration across banks ----------------
  logic              do_col, do_row;
  logic [BANK_W-1:0] gbank;
  always_comb begin
    int unsigned b;
    b = 0;
    do_col = 1'b0; do_row = 1'b0; gbank = '0;
    for (int k = NBANKS - 1; k >= 0; k--) begin
      b = (int'(rr) + k) % NBANKS;
      if (b_has[b] && !b_hit[b]) begin do_row = 1'b1; gbank = BANK_W'(b); end
    end
    if (now >= bus_at) begin
      for (int k = NBANKS - 1; k >= 0; k--) begin
        b = (int'(rr) + k) % NBANKS;
        if (b_has[b] && b_hit[b]) begin do_col = 1'b1; gbank = BANK_W'(b); end
      end
    end
    if (do_col) do_row = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= '0; open_q <= '0; fresh <= '0; bus_at <= '0; rr <= '0;
      for (int b = 0; b < NBANKS; b++) begin
        qv[b] <= '0; orow[b] <= '0; rdy_at[b] <= '0;
        for (int e = 0; e < DEPTH; e++) begin
          q[b][e]  <= '0;
          qd[b][e] <= '0;
        end
      end
      for (int i = 0; i < OUTST; i++) otag[i] <= '0;
      o_wr <= '0; o_rd <= '0;
      dram_cmd_valid <= 1'b0; dram_cmd <= DCMD_ACT; dram_bank <= '0; dram_row <= '0;
      dram_col <= '0; dram_wdata <= '0;
      resp_valid <= 1'b0; resp_tag <= '0; resp_data <= '0;
      row_hits <= '0; activates <= '0; col_cmds <= '0;
    end else begin
      now <= now + 1;
      if (req_valid && req_ready) begin
        qv[in_bank][in_free] <= 1'b1;
        q[in_bank][in_free]  <= '{write: req_write, row: req_addr[COL_W+BANK_W +: ROW_W],
                                  col: req_addr[0 +: COL_W], tag: req_tag, t_in: now};
        qd[in_bank][in_free] <= req_wdata;
      end
      dram_cmd_valid <= 1'b0;
      if (do_col) begin
        qent_t en;
        en = q[gbank][b_sel[gbank]];
        qv[gbank][b_sel[gbank]] <= 1'b0;
        dram_cmd_valid <= 1'b1;
        dram_cmd   <= en.write ? DCMD_WR : DCMD_RD;
        dram_bank  <= gbank;
        dram_row   <= en.row;
        dram_col   <= en.col;
        dram_wdata <= qd[gbank][b_sel[gbank]];
        bus_at     <= now + 32'(BURST);
        col_cmds   <= col_cmds + 1;
        if (!en.write) begin
          otag[o_wr] <= en.tag;
          o_wr       <= o_wr + 1;
        end
        rr <= gbank + 1'b1;
      end else if (do_row) begin
        qent_t en;
        en = q[gbank][b_sel[gbank]];
        dram_cmd_valid <= 1'b1;
        dram_bank      <= gbank;
        dram_row       <= en.row;
        dram_col       <= '0;
        if (open_q[gbank]) begin
          dram_cmd       <= DCMD_PRE;
          open_q[gbank]  <= 1'b0;
          rdy_at[gbank]  <= now + 32'(T_RP);
        end else begin
          dram_cmd       <= DCMD_ACT;
          open_q[gbank]  <= 1'b1;
          orow[gbank]    <= en.row;
          rdy_at[gbank]  <= now + 32'(T_RCD);
          activates      <= activates + 1;
        end
        rr <= gbank + 1'b1;
      end
      // a column command after the first one to an activated row is a row hit
      if (do_col) begin
        fresh[gbank] <= 1'b0;
        if (!fresh[gbank]) row_hits <= row_hits + 1;
      end
      if (do_row && !open_q[gbank]) fresh[gbank] <= 1'b1;
      // read data
      resp_valid <= dram_rvalid;
      if (dram_rvalid) begin
        resp_tag  <= otag[o_rd];
        resp_data <= dram_rdata;
        o_rd      <= o_rd + 1;
      end
    end
  end

  // one command per cycle, columns only to an open row
  property p_col_open;
    @(posedge clk) disable iff (!rst_n)
      do_col |-> open_q[gbank];
  endproperty
  assert property (p_col_open);

endmodule
