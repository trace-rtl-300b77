// alias_decoder: maps a host byte address to a precision view, a 4 KB block and a
// cache line inside that view.
//
// The host sees NVIEWS regions that all alias the same stored data.  View 0 (P1) is
// the full-precision BF16 view and spans L*16 bits; a reduced view i spans L*N_i bits,
// N_i = 2^ret_lg, so one 4 KB logical block occupies 4*N_i host cache lines of view i
// (64 lines in P1, 32 in an 8-bit view, 16 in a 4-bit view).  Region sizes follow the
// paper's Fig. 9 (L*N_i bits per view); the base addresses come from configuration
// inputs and the widths of the address fields are this design's choice.  Views must
// not overlap; the lowest-numbered hit wins.
//
// The decoder also classifies the block: blocks in [kv_lo, kv_hi) hold KV cache
// (channel-major transform on write), blocks in [raw_lo, raw_hi) form an
// uncompressed region whose planes bypass the codec.
//
// Purely combinational.
module alias_decoder
  import trace_pkg::*;
(
  input  logic [HADDR_W-1:0]     addr,
  input  view_cfg_t              views [NVIEWS],
  input  logic [BLK_W-1:0]       kv_lo,
  input  logic [BLK_W-1:0]       kv_hi,
  input  logic [BLK_W-1:0]       raw_lo,
  input  logic [BLK_W-1:0]       raw_hi,
  output logic                   hit,
  output logic [1:0]             view,
  output logic [BLK_W-1:0]       blk,
  output logic [5:0]             line,      // line of the block within the view
  output logic                   is_kv,
  output logic                   is_raw
);

  localparam int unsigned CAP_LG = BLK_W + 12;   // log2 of full-precision bytes

  always_comb begin
    logic [HADDR_W-1:0] off;
    logic [HADDR_W-1:0] lidx;
    int unsigned lg;
    off  = '0;
    lidx = '0;
    lg   = 0;
    hit  = 1'b0;
    view = '0;
    blk  = '0;
    line = '0;
    for (int i = NVIEWS - 1; i >= 0; i--) begin
      if (views[i].valid && addr >= views[i].base) begin
        off = addr - views[i].base;
        lg  = int'(views[i].ret_lg);
        // region size = 2^CAP_LG * N_i / 16
        if ((off >> (CAP_LG - 4 + lg)) == '0) begin
          hit  = 1'b1;
          view = 2'(i);
          lidx = off >> 6;
          blk  = BLK_W'(lidx >> (lg + 2));
          line = 6'(lidx & ((HADDR_W'(1) << (lg + 2)) - 1));
        end
      end
    end
    is_kv  = (blk >= kv_lo)  && (blk < kv_hi);
    is_raw = (blk >= raw_lo) && (blk < raw_hi);
  end

endmodule
