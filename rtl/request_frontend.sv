// request_frontend: stage 1 of the TRACE controller (CXL.mem interface, address
// alias decoder, plane-mask generator).
//
// It accepts a host load or store of one 64-byte cache line, decides which precision
// view the address falls in, splits it into 4 KB block and line, and attaches the
// plane masks that travel with the request so later stages never fetch a plane the
// view does not need.  A store is only legal in the full-precision view P1; a store to
// a reduced view, or any address outside every view, is flagged err and answered with
// an error by the controller (this design's choice, the paper only makes reduced
// views opt-in for reads).
//
// Timing: a fixed FE_LAT-stage pipeline (default 5 cycles, the TRACE front-end time in
// the paper's latency breakdown).  Stage 0 registers the CXL.mem request, stage 1
// registers the alias decode, stage 2 registers the plane masks, the remaining stages
// carry the request.  The whole pipeline stalls while out_valid && !out_ready.
// Handshake on both sides: valid/ready, transfer when both are high.
module request_frontend
  import trace_pkg::*;
#(
  parameter int unsigned FE_LAT = 5
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // CXL.mem request
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic                 in_write,
  input  logic [HADDR_W-1:0]   in_addr,
  input  logic [TAG_W-1:0]     in_tag,
  input  logic [LINE_BITS-1:0] in_wdata,
  // configuration
  input  view_cfg_t            views [NVIEWS],
  input  logic [BLK_W-1:0]     kv_lo,
  input  logic [BLK_W-1:0]     kv_hi,
  input  logic [BLK_W-1:0]     raw_lo,
  input  logic [BLK_W-1:0]     raw_hi,
  // decoded request
  output logic                 out_valid,
  input  logic                 out_ready,
  output fe_req_t              out_req
);

  logic                 vld  [FE_LAT];
  fe_req_t              st   [FE_LAT];
  logic [HADDR_W-1:0]   addr0;
  logic                 stall;

  // decode of stage 0
  logic             hit, is_kv, is_raw;
  logic [1:0]       view;
  logic [BLK_W-1:0] blk;
  logic [5:0]       line;

  alias_decoder u_alias (
    .addr(addr0), .views(views), .kv_lo(kv_lo), .kv_hi(kv_hi),
    .raw_lo(raw_lo), .raw_hi(raw_hi),
    .hit(hit), .view(view), .blk(blk), .line(line), .is_kv(is_kv), .is_raw(is_raw)
  );

  // mask generation on stage 1
  plane_mask_t ret_mask, fetch_mask;
  plane_mask_gen u_mask (
    .r_e(st[1].r_e), .r_m(st[1].r_m), .d_e(st[1].d_e), .d_m(st[1].d_m),
    .kv(st[1].kv), .ret_mask(ret_mask), .fetch_mask(fetch_mask)
  );

  assign stall     = vld[FE_LAT-1] && !out_ready;
  assign in_ready  = !stall;
  assign out_valid = vld[FE_LAT-1];
  assign out_req   = st[FE_LAT-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < FE_LAT; i++) begin
        vld[i] <= 1'b0;
        st[i]  <= '0;
      end
      addr0 <= '0;
    end else if (!stall) begin
      // stage 0: capture the CXL.mem request
      vld[0]      <= in_valid;
      st[0]       <= '0;
      st[0].write <= in_write;
      st[0].tag   <= in_tag;
      st[0].wdata <= in_wdata;
      addr0       <= in_addr;
      // stage 1: alias decode
      vld[1]            <= vld[0];
      st[1]             <= st[0];
      st[1].err         <= !hit || (st[0].write && view != 2'd0);
      st[1].view        <= view;
      st[1].blk         <= blk;
      st[1].line        <= line;
      st[1].kv          <= is_kv;
      st[1].raw_region  <= is_raw;
      st[1].r_e         <= views[view].r_e;
      st[1].r_m         <= views[view].r_m;
      st[1].d_e         <= views[view].d_e;
      st[1].d_m         <= views[view].d_m;
      st[1].ret_lg      <= views[view].ret_lg;
      // stage 2: plane masks
      vld[2]            <= vld[1];
      st[2]             <= st[1];
      st[2].ret_mask    <= ret_mask;
      st[2].fetch_mask  <= st[1].write ? '1 : fetch_mask;
      // remaining stages carry the request
      for (int i = 3; i < FE_LAT; i++) begin
        vld[i] <= vld[i-1];
        st[i]  <= st[i-1];
      end
    end
  end

  initial assert (FE_LAT >= 3) else $error("request_frontend needs at least 3 stages");

endmodule
