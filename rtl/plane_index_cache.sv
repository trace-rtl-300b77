// plane_index_cache: on-chip cache of plane-index entries (stage 2, metadata).
//
// Every 4 KB block has one 64-byte index entry in a reserved DRAM region: the base
// line of its compressed plane bundle, the compressed length of each of the 16
// planes and the raw / bypass / KV flags.  This cache keeps recently used entries
// so the common case resolves the physical plane offsets without a DRAM round trip;
// on a miss the controller reads the entry from DRAM once and writes it in through
// the update port (the paper's behaviour: one extra DRAM read, no speculative plane
// fetch).  Organisation (direct-mapped, SETS entries, write-allocate) is this
// design's choice; the paper gives only the function and the 2-cycle hit time.
//
// Timing: a lookup presented with lk_valid returns lk_done, lk_hit and lk_entry
// exactly LK_LAT = 2 cycles later (cycle 1 reads tag and data arrays, cycle 2
// compares).  Lookups are pipelined, one per cycle.  An update (fill after a miss,
// or a new entry written by the commit path) takes effect on the next clock edge.
module plane_index_cache
  import trace_pkg::*;
#(
  parameter int unsigned SETS = 256
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             lk_valid,
  input  logic [BLK_W-1:0] lk_blk,
  output logic             lk_done,
  output logic             lk_hit,
  output index_entry_t     lk_entry,
  input  logic             up_valid,
  input  logic [BLK_W-1:0] up_blk,
  input  index_entry_t     up_entry,
  output logic [31:0]      hits,
  output logic [31:0]      misses
);

  localparam int unsigned IW = $clog2(SETS);
  localparam int unsigned TW = BLK_W - IW;

  logic [TW-1:0]  tag_q  [SETS];
  index_entry_t   data_q [SETS];
  logic [SETS-1:0] val_q;

  // stage 1
  logic          s1_v;
  logic [TW-1:0] s1_tag;
  logic [TW-1:0] s1_rtag;
  logic          s1_rval;
  index_entry_t  s1_rdata;

  always_ff @(posedge clk) begin
    if (up_valid) begin
      tag_q[up_blk[IW-1:0]]  <= up_blk[BLK_W-1:IW];
      data_q[up_blk[IW-1:0]] <= up_entry;
    end
    s1_rtag  <= tag_q[lk_blk[IW-1:0]];
    s1_rdata <= data_q[lk_blk[IW-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      val_q    <= '0;
      s1_v     <= 1'b0;
      s1_tag   <= '0;
      s1_rval  <= 1'b0;
      lk_done  <= 1'b0;
      lk_hit   <= 1'b0;
      lk_entry <= '0;
      hits     <= '0;
      misses   <= '0;
    end else begin
      if (up_valid) val_q[up_blk[IW-1:0]] <= 1'b1;
      s1_v    <= lk_valid;
      s1_tag  <= lk_blk[BLK_W-1:IW];
      s1_rval <= val_q[lk_blk[IW-1:0]];
      lk_done  <= s1_v;
      lk_hit   <= s1_v && s1_rval && (s1_rtag == s1_tag);
      lk_entry <= s1_rdata;
      if (s1_v) begin
        if (s1_rval && (s1_rtag == s1_tag)) hits   <= hits + 1;
        else                                misses <= misses + 1;
      end
    end
  end

endmodule
