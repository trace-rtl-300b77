// tb_trace_controller: end-to-end test of the TRACE controller at its default
// parameters (no overrides), with a behavioural DRAM behind the command bus.
//
// What it does: configures four aliased views of the same tensors
//   view 0  P1   full BF16                 (r_e 8, r_m 7)          16-bit codes
//   view 1  FP8  E4M3 cut, truncated       (r_e 4, r_m 3)          8-bit codes
//   view 2  FP4  sign + 3 exponent planes  (r_e 3, r_m 0, 1 guard) 4-bit codes
//   view 3  E5M2 with 2 mantissa guard planes, rounded              8-bit codes
// writes whole 4 KB blocks through view 0 (weights with a narrow exponent range,
// incompressible noise, KV cache blocks, blocks in the uncompressed region, two blocks
// that share an index-cache set), then reads lines back through every view and
// compares each returned line with a reference computed here from the written words
// (tb_ref_pkg.view_code: keep the view's bits, round to nearest even on the guard
// bits, saturate).  It also issues a store to a reduced view and a load outside every
// view (both must come back with rsp_err), loads a block that was never written (must
// read zero) and loads a block right after its last store (the load must wait for
// the commit and see the new data).
//
// Mechanisms counted, each must happen at least once: plane compressed, plane kept
// raw after compressor overflow, all-raw (bypass) load, index hit, index miss with
// metadata read, planes skipped by a reduced view, staging-buffer stall, DRAM row hit,
// KV block commit, uncompressed-region commit, load held behind a pending commit,
// rejected request.  The DRAM model must see no timing violation.
//
// Latency: the paper's load path is F5 + M2 + S10 + tRCD 27 + tCL 27 + burst 4 plus
// codec; every load of a written block must take at least the fixed part (75 cycles)
// (a block never written answers from its cached empty index entry), and the
// minimum and maximum are printed.  Responses are matched by tag because a store
// acknowledgement can overtake a load that is still being served.
module tb_trace_controller;
  import trace_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned WATCHDOG = 400000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 req_valid, req_ready, req_write;
  logic [HADDR_W-1:0]   req_addr;
  logic [TAG_W-1:0]     req_tag;
  logic [LINE_BITS-1:0] req_wdata;
  logic                 rsp_valid, rsp_write, rsp_err;
  logic [TAG_W-1:0]     rsp_tag;
  logic [LINE_BITS-1:0] rsp_data;
  view_cfg_t            views [NVIEWS];
  logic [BLK_W-1:0]     kv_lo, kv_hi, raw_lo, raw_hi;
  logic                 dram_cmd_valid, dram_rvalid;
  dram_cmd_e            dram_cmd;
  logic [BANK_W-1:0]    dram_bank;
  logic [ROW_W-1:0]     dram_row;
  logic [COL_W-1:0]     dram_col;
  logic [LINE_BITS-1:0] dram_wdata, dram_rdata;
  trace_stats_t         stats;
  int                   dviol, dreads, dwrites;

  trace_controller dut (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_write, .req_addr, .req_tag, .req_wdata,
    .rsp_valid, .rsp_tag, .rsp_write, .rsp_err, .rsp_data,
    .views, .kv_lo, .kv_hi, .raw_lo, .raw_hi,
    .dram_cmd_valid, .dram_cmd, .dram_bank, .dram_row, .dram_col, .dram_wdata,
    .dram_rvalid, .dram_rdata, .stats
  );

  dram_model u_dram (
    .clk, .rst_n, .cmd_valid(dram_cmd_valid), .cmd(dram_cmd), .bank(dram_bank),
    .row(dram_row), .col(dram_col), .wdata(dram_wdata), .rvalid(dram_rvalid),
    .rdata(dram_rdata), .violations(dviol), .reads(dreads), .writes(dwrites)
  );

  int checks = 0;
  int failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- reference data ----------------
  localparam int NBLK = 12;
  int unsigned       blk_id [NBLK];
  shortint unsigned  ref_w  [NBLK][2048];
  bit                written[NBLK];

  // expected responses by tag
  typedef struct { bit write; bit err; logic [LINE_BITS-1:0] data; longint t0; bit lat; } exp_t;
  exp_t   expq [int];
  int     outstanding = 0;
  logic [TAG_W-1:0] next_tag = '0;
  longint lat_min = 1 << 30, lat_max = 0;

  // mechanism counters
  int n_comp_planes = 0, n_raw_planes = 0, n_kv_commits = 0, n_rawreg_commits = 0;
  int n_pending_wait = 0;

  // ---------------- helpers ----------------
  function automatic logic [HADDR_W-1:0] vaddr(int v, int unsigned b, int l);
    int unsigned lines = 4 << views[v].ret_lg;
    return views[v].base + HADDR_W'((longint'(b) * lines + l) * 64);
  endfunction

  function automatic logic [LINE_BITS-1:0] exp_line(int k, int v, int l);
    logic [LINE_BITS-1:0] d = '0;
    int n = 1 << views[v].ret_lg;
    int epl = 512 / n;
    for (int e = 0; e < epl; e++) begin
      int unsigned code = view_code(ref_w[k][l*epl + e], views[v].r_e, views[v].r_m,
                                    views[v].d_e, views[v].d_m);
      for (int b = 0; b < n; b++) d[e*n + b] = code[b];
    end
    return d;
  endfunction

  task automatic send(bit wr, logic [HADDR_W-1:0] a, logic [LINE_BITS-1:0] wd, exp_t e);
    while (expq.exists(int'(next_tag))) @(posedge clk);
    e.t0 = cyc;
    expq[int'(next_tag)] = e;
    outstanding++;
    @(negedge clk);
    req_valid = 1'b1; req_write = wr; req_addr = a; req_wdata = wd; req_tag = next_tag;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 req_valid = 1'b0;
    next_tag = next_tag + 1;
  endtask

  task automatic write_block(int k);
    exp_t e;
    e.write = 1; e.err = 0; e.data = '0; e.lat = 0;
    for (int l = 0; l < 64; l++) begin
      logic [LINE_BITS-1:0] d;
      for (int j = 0; j < 32; j++) d[j*16 +: 16] = ref_w[k][l*32 + j];
      send(1'b1, vaddr(0, blk_id[k], l), d, e);
    end
    written[k] = 1;
  endtask

  task automatic read_line(int k, int v, int l);
    exp_t e;
    e.write = 0; e.err = 0; e.lat = written[k];
    e.data = written[k] ? exp_line(k, v, l) : '0;
    send(1'b0, vaddr(v, blk_id[k], l), '0, e);
  endtask

  task automatic drain();
    while (outstanding != 0) @(posedge clk);
  endtask

  // ---------------- response checker (sampled mid-cycle) ----------------
  always @(negedge clk) begin
    if (rst_n && rsp_valid) begin
      checks++;
      if (!expq.exists(int'(rsp_tag))) begin
        failures++;
        $display("FAIL: response with unknown tag %0d", rsp_tag);
      end else begin
        exp_t e;
        e = expq[int'(rsp_tag)];
        if (rsp_write != e.write || rsp_err != e.err || (!e.write && !e.err && rsp_data !== e.data)) begin
          failures++;
          $display("FAIL: tag %0d write %0d/%0d err %0d/%0d data match %0d", rsp_tag,
                   rsp_write, e.write, rsp_err, e.err, rsp_data === e.data);
          $display("      got %h", rsp_data[127:0]);
          $display("      exp %h", e.data[127:0]);
        end
        if (e.lat) begin
          longint l;
          l = cyc - e.t0;
          if (l < lat_min) lat_min = l;
          if (l > lat_max) lat_max = l;
          checks++;
          if (l < 75) begin
            failures++;
            $display("FAIL: load latency %0d below the fixed path of 75 cycles", l);
          end
        end
        expq.delete(int'(rsp_tag));
        outstanding--;
      end
    end
  end

  // ---------------- mechanism monitors (hierarchical, mid-cycle) ----------------
  always @(negedge clk) begin
    if (rst_n) begin
      if (dut.cs == dut.C_COMP && dut.c_done && !dut.c_nocomp) begin
        n_comp_planes += NPLANES - $countones(dut.c_raw);
        n_raw_planes  += $countones(dut.c_raw);
      end
      if (dut.cs == dut.C_REL && dut.c_kv) n_kv_commits++;
      if (dut.cs == dut.C_COMP && dut.c_done && dut.c_nocomp) n_rawreg_commits++;
      if (dut.fe_valid && !dut.fe.write && !dut.fe.err && dut.rs == dut.R_IDLE && dut.q_pending)
        n_pending_wait++;
    end
  end

  // ---------------- data generators ----------------
  function automatic shortint unsigned weight_word();
    int unsigned s = $urandom % 2;
    int unsigned ex = 120 + $urandom % 8;
    int unsigned mn = $urandom % 128;
    return shortint'((s << 15) | (ex << 7) | mn);
  endfunction

  task automatic gen(int k, int kind);
    for (int i = 0; i < 2048; i++) begin
      case (kind)
        0: ref_w[k][i] = weight_word();
        1: ref_w[k][i] = shortint'($urandom);
        default: begin                        // KV: token t = i / 128, channel c = i % 128
          int c = i % 128;
          int unsigned ex = 90 + (c % 40) + $urandom % 3;
          ref_w[k][i] = shortint'((($urandom % 2) << 15) | (ex << 7) | ($urandom % 128));
        end
      endcase
    end
  endtask

  function automatic void cfg_view(int v, int re, int rm, int de, int dm, int lg, longint base);
    views[v].valid = 1'b1;
    views[v].r_e = 4'(re); views[v].r_m = 3'(rm);
    views[v].d_e = 4'(de); views[v].d_m = 3'(dm);
    views[v].ret_lg = 3'(lg);
    views[v].base = HADDR_W'(base);
  endfunction

  // ---------------- watchdog ----------------
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired (read state %0d, commit state %0d, outstanding %0d, commits %0d)",
             dut.rs, dut.cs, outstanding, stats.commits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus ----------------
  initial begin
    exp_t e;
    req_valid = 1'b0; req_write = 1'b0; req_addr = '0; req_tag = '0; req_wdata = '0;
    // view regions: P1 256 GiB at 0, 8-bit views 128 GiB, 4-bit view 64 GiB
    cfg_view(0, 8, 7, 0, 0, 4, 64'h00_0000_0000);
    cfg_view(1, 4, 3, 0, 0, 3, 64'h40_0000_0000);
    cfg_view(2, 3, 0, 1, 0, 2, 64'h80_0000_0000);
    cfg_view(3, 5, 2, 0, 2, 3, 64'hC0_0000_0000);
    kv_lo = 20'd16; kv_hi = 20'd32; raw_lo = 20'd32; raw_hi = 20'd48;

    // blocks: weights, noise, KV, KV, uncompressed region, set-conflict pair, stall set
    blk_id = '{1, 3, 16, 17, 32, 257, 4, 5, 6, 7, 8, 100};
    gen(0, 0); gen(1, 1); gen(2, 2); gen(3, 2); gen(4, 0); gen(5, 0);
    for (int k = 6; k < 11; k++) gen(k, (k == 8) ? 1 : 0);
    foreach (written[k]) written[k] = 0;

    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);

    // rejected requests: store to a reduced view, load outside every view
    e.write = 1; e.err = 1; e.data = '0; e.lat = 0;
    send(1'b1, vaddr(1, 1, 0), '1, e);
    e.write = 0; e.err = 1;
    send(1'b0, HADDR_W'(64'h60_0000_0040), '0, e);   // gap between views 1 and 2

    // block 1 then an immediate load of it (held behind its commit)
    write_block(0);
    read_line(0, 0, 5);
    drain();
    // remaining blocks back to back (the staging buffer fills and stalls stores)
    for (int k = 1; k < 11; k++) write_block(k);
    drain();
    wait (stats.commits == 11);
    repeat (20) @(posedge clk);

    // loads through every view; block 1 was evicted from the index cache by block 257
    for (int k = 0; k < NBLK; k++)
      for (int v = 0; v < NVIEWS; v++) begin
        int nl;
        nl = 4 << views[v].ret_lg;
        read_line(k, v, 0);
        read_line(k, v, nl - 1);
        read_line(k, v, int'($urandom % nl));
      end
    drain();
    repeat (20) @(posedge clk);

    // ---------------- report ----------------
    $display("loads %0d stores %0d errors %0d commits %0d", stats.reads, stats.writes,
             stats.errors, stats.commits);
    $display("index hits %0d misses %0d; bypass loads %0d, raw planes served %0d",
             stats.idx_hits, stats.idx_misses, stats.bypass_reads, stats.bypass_planes);
    $display("planes fetched %0d skipped %0d; lines fetched %0d written %0d",
             stats.planes_fetched, stats.planes_skipped, stats.lines_fetched, stats.lines_written);
    $display("staging stalls %0d; row hits %0d activates %0d; dram violations %0d",
             stats.wbuf_stalls, stats.row_hits, stats.activates, dviol);
    $display("planes compressed %0d raw (overflow) %0d; KV commits %0d; raw-region commits %0d; held loads %0d",
             n_comp_planes, n_raw_planes, n_kv_commits, n_rawreg_commits, n_pending_wait);
    $display("load latency min %0d max %0d cycles", lat_min, lat_max);

    checks++; if (n_comp_planes == 0)      begin failures++; $display("FAIL: no plane compressed"); end
    checks++; if (n_raw_planes == 0)       begin failures++; $display("FAIL: no compressor overflow"); end
    checks++; if (stats.bypass_reads == 0) begin failures++; $display("FAIL: no bypass load"); end
    checks++; if (stats.idx_hits == 0)     begin failures++; $display("FAIL: no index hit"); end
    checks++; if (stats.idx_misses == 0)   begin failures++; $display("FAIL: no index miss"); end
    checks++; if (stats.planes_skipped == 0) begin failures++; $display("FAIL: no plane skipped"); end
    checks++; if (stats.wbuf_stalls == 0)  begin failures++; $display("FAIL: no staging stall"); end
    checks++; if (stats.row_hits == 0)     begin failures++; $display("FAIL: no row hit"); end
    checks++; if (n_kv_commits == 0)       begin failures++; $display("FAIL: no KV commit"); end
    checks++; if (n_rawreg_commits == 0)   begin failures++; $display("FAIL: no raw-region commit"); end
    checks++; if (n_pending_wait == 0)     begin failures++; $display("FAIL: no load held by commit"); end
    checks++; if (stats.errors != 2)       begin failures++; $display("FAIL: errors %0d", stats.errors); end
    checks++; if (dviol != 0)              begin failures++; $display("FAIL: DRAM timing violations"); end
    checks++; if (stats.reads != 1 + NBLK * NVIEWS * 3) begin failures++; $display("FAIL: load count"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
