// trace_controller: a CXL Type-3 memory controller that stores tensors as compressed
// bit-planes (TRACE).  Top level.
//
// The host keeps plain 64-byte CXL.mem loads and stores.  Inside, every 4 KB block is
// kept as 16 bit-planes of BF16, each plane LZ4-compressed on its own, and a host
// load that targets a reduced-precision alias view reads only the planes that view
// needs.  Four stages, as in the paper's microarchitecture figure:
//   1 request_frontend   - CXL.mem decode, alias decoder, plane-mask generator (5 cyc)
//   2 plane_index_cache  - 64 B plane-index entries cached on chip (2 cyc on a hit);
//                          staging_buffer holds the KV per-stream window state
//   3 codec_complex      - 32 LZ4 lanes; plane_encoder (transform T + bit-plane split)
//                          on the write path, plane_reconstruct (R and T^-1) on reads
//   4 plane_scheduler    - per-bank plane FIFOs, row-hit first, DRAM commands
//
// Store path: a store to the full-precision view goes into a staging slot.  When a
// slot holds all 64 lines of its block, the commit engine transforms it (KV blocks:
// channel-major regrouping and exponent delta), splits it into planes, compresses the
// 16 planes in parallel (a plane that does not shrink, or any plane of an
// uncompressed region, is kept raw), appends the plane bundle to DRAM (sign plane
// first, then exponent planes, then mantissa planes, each plane 1..4 lines), writes the
// block's 64 B index entry to the metadata region (META_BASE + block) and into the
// index cache, then frees the slot.  The store itself is acknowledged as soon as it is
// in the staging buffer.
//
// Load path: the front end attaches the view's fetch mask; the index entry comes from
// the cache or, on a miss, from one DRAM read of the metadata region; the lines of the
// masked planes are read (planes outside the mask are never requested); the codec
// decodes them (raw planes bypass it, a block stored wholly raw skips the codec
// stage); plane_reconstruct rebuilds the requested line; the response is returned.
//
// This design's own choices (the paper is silent): one load in flight at a time;
// bundles are appended at a bump pointer and never reclaimed; a load waits while its
// block sits complete in the staging buffer or is being committed, and a load of a
// block with only part of its lines staged returns the last committed version; a
// block that was never written reads as zero; a store to a reduced view is refused
// with rsp_err; responses have no backpressure.  The codec lanes run at one byte per
// cycle, so a compressed load takes several hundred cycles rather than the paper's
// 85-89 cycles (see the README).
//
// Lint notes: Verilator reports rst_n as used both asynchronously and synchronously
// (SYNCASYNCNET).  The synchronous use is only the disable iff (!rst_n) of a
// concurrent assertion, which is not logic; every flip-flop resets asynchronously.
// The reset of the 32768-bit block registers is written as '0, which Verilator
// reports as a replication above its default limit (WIDTHCONCAT); it is a plain
// clear of a wide register and stands as written.
module trace_controller
  import trace_pkg::*;
#(
  parameter int unsigned LANES       = 32,
  parameter int unsigned FE_LAT      = 5,
  parameter int unsigned IDX_SETS    = 256,
  parameter int unsigned WBUF_SLOTS  = 4,
  parameter int unsigned SCHED_LAT   = 10,
  parameter int unsigned SCHED_DEPTH = 8,
  parameter int unsigned T_RCD       = 27,
  parameter int unsigned T_RP        = 27,
  parameter int unsigned BURST       = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // CXL.mem request (M2S)
  input  logic                 req_valid,
  output logic                 req_ready,
  input  logic                 req_write,
  input  logic [HADDR_W-1:0]   req_addr,
  input  logic [TAG_W-1:0]     req_tag,
  input  logic [LINE_BITS-1:0] req_wdata,
  // CXL.mem response (S2M): load data or store completion
  output logic                 rsp_valid,
  output logic [TAG_W-1:0]     rsp_tag,
  output logic                 rsp_write,
  output logic                 rsp_err,
  output logic [LINE_BITS-1:0] rsp_data,
  // configuration
  input  view_cfg_t            views [NVIEWS],
  input  logic [BLK_W-1:0]     kv_lo,
  input  logic [BLK_W-1:0]     kv_hi,
  input  logic [BLK_W-1:0]     raw_lo,
  input  logic [BLK_W-1:0]     raw_hi,
  // DRAM command bus (to the DDR PHY)
  output logic                 dram_cmd_valid,
  output dram_cmd_e            dram_cmd,
  output logic [BANK_W-1:0]    dram_bank,
  output logic [ROW_W-1:0]     dram_row,
  output logic [COL_W-1:0]     dram_col,
  output logic [LINE_BITS-1:0] dram_wdata,
  input  logic                 dram_rvalid,
  input  logic [LINE_BITS-1:0] dram_rdata,
  // event counters
  output trace_stats_t         stats
);

  localparam int unsigned SW = $clog2(WBUF_SLOTS);
  localparam logic [7:0] META_TAG = 8'h80;

  // ======================= stage 1: front end =======================
  logic    fe_valid, fe_ready;
  fe_req_t fe;

  request_frontend #(.FE_LAT(FE_LAT)) u_fe (
    .clk, .rst_n,
    .in_valid(req_valid), .in_ready(req_ready), .in_write(req_write), .in_addr(req_addr),
    .in_tag(req_tag), .in_wdata(req_wdata),
    .views, .kv_lo, .kv_hi, .raw_lo, .raw_hi,
    .out_valid(fe_valid), .out_ready(fe_ready), .out_req(fe)
  );

  // ======================= staging buffer =======================
  logic                             sb_wr_valid, sb_wr_ready;
  logic                             sb_out_valid, sb_out_ready;
  logic [SW-1:0]                    sb_out_slot, rel_slot;
  logic [BLK_W-1:0]                 sb_out_blk;
  logic                             sb_out_kv, sb_out_raw, rel_valid;
  logic [BLOCK_ELEMS*ELEM_BITS-1:0] sb_out_data;
  logic                             q_pending;
  logic [4:0]                       window_idx [WBUF_SLOTS];
  logic [31:0]                      wbuf_stalls;

  staging_buffer #(.SLOTS(WBUF_SLOTS)) u_sb (
    .clk, .rst_n,
    .wr_valid(sb_wr_valid), .wr_ready(sb_wr_ready), .wr_blk(fe.blk), .wr_line(fe.line),
    .wr_data(fe.wdata), .wr_kv(fe.kv), .wr_raw(fe.raw_region),
    .out_valid(sb_out_valid), .out_ready(sb_out_ready), .out_slot(sb_out_slot),
    .out_blk(sb_out_blk), .out_kv(sb_out_kv), .out_raw(sb_out_raw), .out_data(sb_out_data),
    .rel_valid(rel_valid), .rel_slot(rel_slot),
    .q_blk(fe.blk), .q_pending(q_pending), .window_idx(window_idx), .stalls(wbuf_stalls)
  );

  // ======================= stage 2: plane-index cache =======================
  logic             lk_valid, lk_done, lk_hit;
  logic [BLK_W-1:0] lk_blk;
  index_entry_t     lk_entry;
  logic             up_valid;
  logic [BLK_W-1:0] up_blk;
  index_entry_t     up_entry;
  logic [31:0]      idx_hits, idx_misses;

  plane_index_cache #(.SETS(IDX_SETS)) u_idx (
    .clk, .rst_n, .lk_valid, .lk_blk, .lk_done, .lk_hit, .lk_entry,
    .up_valid, .up_blk, .up_entry, .hits(idx_hits), .misses(idx_misses)
  );

  // ======================= stage 4: scheduler =======================
  logic                 s_valid, s_ready, s_write;
  logic [PADDR_W-1:0]   s_addr;
  logic [LINE_BITS-1:0] s_wdata;
  logic [7:0]           s_tag;
  logic                 s_rvalid;
  logic [7:0]           s_rtag;
  logic [LINE_BITS-1:0] s_rdata;
  logic [31:0]          row_hits, activates, col_cmds;

  plane_scheduler #(.DEPTH(SCHED_DEPTH), .SCHED_LAT(SCHED_LAT), .T_RCD(T_RCD),
                    .T_RP(T_RP), .BURST(BURST), .RTAG_W(8)) u_sched (
    .clk, .rst_n,
    .req_valid(s_valid), .req_ready(s_ready), .req_write(s_write), .req_addr(s_addr),
    .req_wdata(s_wdata), .req_tag(s_tag),
    .resp_valid(s_rvalid), .resp_tag(s_rtag), .resp_data(s_rdata),
    .dram_cmd_valid, .dram_cmd, .dram_bank, .dram_row, .dram_col, .dram_wdata,
    .dram_rvalid, .dram_rdata, .row_hits, .activates, .col_cmds
  );

  // ======================= stage 3: codec complex =======================
  logic                               c_start, c_nocomp, c_busy, c_done;
  logic [NPLANES-1:0][PLANE_BITS-1:0] c_planes, c_data;
  logic [NPLANES-1:0][PLEN_W-1:0]     c_len;
  logic [NPLANES-1:0]                 c_raw;
  logic                               d_start, d_busy, d_done, d_err;
  logic [NPLANES-1:0][PLANE_BITS-1:0] d_out;
  logic [31:0]                        bypass_planes;

  // read-side buffers
  logic [NPLANES-1:0][PLANE_BITS-1:0] cbuf;
  index_entry_t                       rent;
  fe_req_t                            rq;     // load being served

  codec_complex #(.LANES(LANES)) u_codec (
    .clk, .rst_n,
    .c_start, .c_nocomp, .c_planes, .c_busy, .c_done, .c_data, .c_len, .c_raw,
    .d_start, .d_planes(cbuf), .d_len(rent.len), .d_raw(rent.raw), .d_mask(rq.fetch_mask),
    .d_busy, .d_done, .d_out, .d_err, .bypass_planes
  );

  // ======================= bundle layout helpers =======================
  // line offset of plane p inside its bundle: planes are stored 15 (sign) down to 0
  function automatic logic [6:0] plane_off(input logic [NPLANES-1:0][PLEN_W-1:0] len,
                                           input int unsigned p);
    logic [6:0] o;
    o = '0;
    for (int q = 0; q < NPLANES; q++)
      if (q > int'(p)) o = o + 7'(plane_lines(len[q]));
    return o;
  endfunction

  // ======================= read engine =======================
  typedef enum logic [3:0] {R_IDLE, R_LOOK, R_META, R_FILL, R_ISSUE, R_WAIT, R_DEC,
                            R_RECON, R_RESP} rstate_e;
  rstate_e              rs;
  logic [3:0]           r_plane;
  logic [2:0]           r_line;
  logic [6:0]           r_pend;       // lines still to come back
  logic                 r_issue_done;
  logic [LINE_BITS-1:0] r_data;
  logic                 r_meta_sent;

  logic [NPLANES-1:0][PLANE_BITS-1:0] rec_planes;
  logic [LINE_BITS-1:0]               rec_line;
  assign rec_planes = rent.bypass ? cbuf : d_out;

  plane_reconstruct u_rec (
    .planes(rec_planes), .fetch_mask(rq.fetch_mask), .kv(rent.kv),
    .r_e(rq.r_e), .r_m(rq.r_m), .d_e(rq.d_e), .d_m(rq.d_m), .ret_lg(rq.ret_lg),
    .line(rq.line), .data(rec_line)
  );

  // ======================= commit engine =======================
  typedef enum logic [2:0] {C_IDLE, C_ENC, C_COMP, C_WR, C_META, C_REL} cstate_e;
  cstate_e                            cs;
  logic [SW-1:0]                      c_slot;
  logic [BLK_W-1:0]                   c_blk;
  logic                               c_kv;
  logic [NPLANES-1:0][PLANE_BITS-1:0] enc_planes;
  logic [3:0]                         c_plane;
  logic [2:0]                         c_line;
  logic [PADDR_W-1:0]                 c_base, alloc_ptr;
  index_entry_t                       c_entry;

  plane_encoder u_enc (.kv(sb_out_kv), .words(sb_out_data), .planes(enc_planes));

  // ======================= dispatch from the front end =======================
  logic fe_take_rd, fe_take_wr, fe_take_err, rsp_from_rd;
  assign rsp_from_rd = (rs == R_RESP);
  always_comb begin
    fe_take_rd  = fe_valid && !fe.err && !fe.write && rs == R_IDLE && !q_pending;
    fe_take_wr  = fe_valid && !fe.err && fe.write && sb_wr_ready && !rsp_from_rd;
    fe_take_err = fe_valid && fe.err && !rsp_from_rd;
    fe_ready    = fe_take_rd || fe_take_wr || fe_take_err;
    sb_wr_valid = fe_valid && !fe.err && fe.write && !rsp_from_rd;
  end

  // response mux (a load response wins; stores and errors wait one cycle)
  always_comb begin
    rsp_valid = rsp_from_rd || fe_take_wr || fe_take_err;
    rsp_tag   = rsp_from_rd ? rq.tag : fe.tag;
    rsp_write = rsp_from_rd ? 1'b0 : fe.write;
    rsp_err   = rsp_from_rd ? 1'b0 : fe_take_err;
    rsp_data  = rsp_from_rd ? r_data : '0;
  end

  // ======================= scheduler port arbitration =======================
  logic r_req, c_req;
  always_comb begin
    r_req = (rs == R_ISSUE && !r_issue_done) || (rs == R_META && !r_meta_sent);
    c_req = (cs == C_WR) || (cs == C_META);
    s_valid = r_req || c_req;
    if (r_req) begin
      s_write = 1'b0;
      s_wdata = '0;
      if (rs == R_META) begin
        s_addr = META_BASE + PADDR_W'(rq.blk);
        s_tag  = META_TAG;
      end else begin
        s_addr = rent.base + PADDR_W'(plane_off(rent.len, int'(r_plane))) + PADDR_W'(r_line);
        s_tag  = {2'b00, r_plane, r_line[1:0]};
      end
    end else begin
      s_write = 1'b1;
      s_tag   = '0;
      if (cs == C_META) begin
        s_addr  = META_BASE + PADDR_W'(c_blk);
        s_wdata = LINE_BITS'(c_entry);
      end else begin
        s_addr  = c_base + PADDR_W'(plane_off(c_len, int'(c_plane))) + PADDR_W'(c_line);
        s_wdata = c_data[c_plane][c_line[1:0]*LINE_BITS +: LINE_BITS];
      end
    end
  end

  // next (plane, line) to issue on the read side, highest plane first
  function automatic logic [4:0] next_plane(input plane_mask_t m, input int unsigned from);
    for (int p = NPLANES - 1; p >= 0; p--)
      if (p < int'(from) && m[p]) return {1'b1, 4'(p)};
    return '0;
  endfunction

  // index entry being written by the commit engine
  always_comb begin
    c_entry        = '0;
    c_entry.valid  = 1'b1;
    c_entry.kv     = c_kv;
    c_entry.raw    = c_raw;
    c_entry.bypass = &c_raw;
    c_entry.base   = c_base;
    c_entry.len    = c_len;
  end

  // index cache update: commit has priority over a fill after a miss
  logic fill_now;
  always_comb begin
    fill_now = (rs == R_FILL) && !(cs == C_META && s_ready && !r_req);
    up_valid = (cs == C_META && s_ready && !r_req) || fill_now;
    up_blk   = (cs == C_META && s_ready && !r_req) ? c_blk : rq.blk;
    up_entry = (cs == C_META && s_ready && !r_req) ? c_entry : rent;
  end

  assign lk_valid = fe_take_rd;
  assign lk_blk   = fe.blk;

  // ----- read engine -----
  logic [4:0] np_first, np_next;
  assign np_first = next_plane(rq.fetch_mask, NPLANES);
  assign np_next  = next_plane(rq.fetch_mask, int'(r_plane));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs <= R_IDLE; rq <= '0; rent <= '0; r_plane <= '0; r_line <= '0; r_pend <= '0;
      r_issue_done <= 1'b0; r_data <= '0; r_meta_sent <= 1'b0;
      cbuf <= '0; d_start <= 1'b0;
    end else begin
      d_start <= 1'b0;
      // collect returning data lines
      if (s_rvalid && s_rtag != META_TAG) begin
        cbuf[s_rtag[5:2]][s_rtag[1:0]*LINE_BITS +: LINE_BITS] <= s_rdata;
      end
      case (rs)
        R_IDLE: if (fe_take_rd) begin
          rq <= fe;
          rs <= R_LOOK;
        end
        R_LOOK: if (lk_done) begin
          if (lk_hit) begin
            rent <= lk_entry;
            rs   <= R_ISSUE;
          end else begin
            r_meta_sent <= 1'b0;
            rs <= R_META;
          end
          r_issue_done <= 1'b0;
          r_plane <= np_first[3:0];
          r_line  <= '0;
          r_pend  <= '0;
        end
        R_META: begin
          if (s_valid && s_ready && r_req) r_meta_sent <= 1'b1;
          if (s_rvalid && s_rtag == META_TAG) begin
            rent <= index_entry_t'(s_rdata[IDX_BITS-1:0]);
            rs   <= R_FILL;
          end
        end
        R_FILL: if (fill_now) rs <= R_ISSUE;
        R_ISSUE: begin
          if (!rent.valid) begin
            rs     <= R_RESP;
            r_data <= '0;
          end else begin
            if (s_valid && s_ready && r_req) begin
              r_pend <= r_pend + 1 - ((s_rvalid && s_rtag != META_TAG) ? 7'd1 : 7'd0);
              if (r_line + 1 < 3'(plane_lines(rent.len[r_plane]))) begin
                r_line <= r_line + 1;
              end else begin
                r_line <= '0;
                if (np_next[4]) r_plane <= np_next[3:0];
                else begin
                  r_issue_done <= 1'b1;
                  rs <= R_WAIT;
                end
              end
            end else if (s_rvalid && s_rtag != META_TAG) begin
              r_pend <= r_pend - 1;
            end
          end
        end
        R_WAIT: begin
          if (s_rvalid && s_rtag != META_TAG) r_pend <= r_pend - 1;
          if (r_pend == 0 || (r_pend == 1 && s_rvalid && s_rtag != META_TAG)) begin
            if (rent.bypass) rs <= R_RECON;
            else begin
              d_start <= 1'b1;
              rs <= R_DEC;
            end
          end
        end
        R_DEC: if (d_done) rs <= R_RECON;
        R_RECON: begin
          r_data <= rec_line;
          rs     <= R_RESP;
        end
        R_RESP: rs <= R_IDLE;
        default: rs <= R_IDLE;
      endcase
    end
  end

  // ----- commit engine -----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs <= C_IDLE; c_slot <= '0; c_blk <= '0; c_kv <= 1'b0; c_planes <= '0;
      c_start <= 1'b0; c_nocomp <= 1'b0; c_plane <= '0; c_line <= '0; c_base <= '0;
      alloc_ptr <= '0; rel_valid <= 1'b0; rel_slot <= '0;
    end else begin
      c_start   <= 1'b0;
      rel_valid <= 1'b0;
      case (cs)
        C_IDLE: if (sb_out_valid) begin
          c_slot   <= sb_out_slot;
          c_blk    <= sb_out_blk;
          c_kv     <= sb_out_kv;
          c_nocomp <= sb_out_raw;
          c_planes <= enc_planes;
          cs       <= C_ENC;
        end
        C_ENC: begin
          c_start <= 1'b1;
          cs      <= C_COMP;
        end
        C_COMP: if (c_done) begin
          c_base  <= alloc_ptr;
          c_plane <= 4'(NPLANES - 1);
          c_line  <= '0;
          cs      <= C_WR;
        end
        C_WR: if (s_ready && !r_req) begin
          if (c_line + 1 < 3'(plane_lines(c_len[c_plane]))) c_line <= c_line + 1;
          else begin
            c_line <= '0;
            if (c_plane == 0) begin
              alloc_ptr <= c_base + PADDR_W'(plane_off(c_len, 0)) +
                           PADDR_W'(plane_lines(c_len[0]));
              cs <= C_META;
            end else c_plane <= c_plane - 1;
          end
        end
        C_META: if (s_ready && !r_req) cs <= C_REL;
        C_REL: begin
          rel_valid <= 1'b1;
          rel_slot  <= c_slot;
          cs        <= C_IDLE;
        end
        default: cs <= C_IDLE;
      endcase
    end
  end
  assign sb_out_ready = (cs == C_IDLE);

  // ======================= statistics =======================
  logic [31:0] n_reads, n_writes, n_errors, n_commits, n_bypass_reads;
  logic [31:0] n_pf, n_ps, n_lf, n_lw;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_reads <= '0; n_writes <= '0; n_errors <= '0; n_commits <= '0;
      n_bypass_reads <= '0; n_pf <= '0; n_ps <= '0; n_lf <= '0; n_lw <= '0;
    end else begin
      if (rsp_from_rd) n_reads <= n_reads + 1;
      if (fe_take_wr)  n_writes <= n_writes + 1;
      if (fe_take_err) n_errors <= n_errors + 1;
      if (cs == C_REL) n_commits <= n_commits + 1;
      if (rs == R_WAIT && (r_pend == 0 || (r_pend == 1 && s_rvalid && s_rtag != META_TAG))) begin
        if (rent.bypass) n_bypass_reads <= n_bypass_reads + 1;
        n_pf <= n_pf + 32'($countones(rq.fetch_mask));
        n_ps <= n_ps + 32'(NPLANES - $countones(rq.fetch_mask));
      end
      if (s_valid && s_ready && r_req && rs == R_ISSUE) n_lf <= n_lf + 1;
      if (s_valid && s_ready && !r_req && cs == C_WR) n_lw <= n_lw + 1;
    end
  end

  always_comb begin
    stats.reads          = n_reads;
    stats.writes         = n_writes;
    stats.errors         = n_errors;
    stats.commits        = n_commits;
    stats.idx_hits       = idx_hits;
    stats.idx_misses     = idx_misses;
    stats.bypass_reads   = n_bypass_reads;
    stats.bypass_planes  = bypass_planes;
    stats.planes_fetched = n_pf;
    stats.planes_skipped = n_ps;
    stats.lines_fetched  = n_lf;
    stats.lines_written  = n_lw;
    stats.wbuf_stalls    = wbuf_stalls;
    stats.row_hits       = row_hits;
    stats.activates      = activates;
  end

  // the codec never reports a malformed stream for data this controller wrote
  assert property (@(posedge clk) disable iff (!rst_n) d_done |-> !d_err);

endmodule
