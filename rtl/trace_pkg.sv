// trace_pkg: constants and types shared by the TRACE controller.
//
// The device keeps the host's 64-byte cache-line view but stores every 4 KB logical
// block as 16 bit-planes of a BF16 container (sign plane 15, exponent planes 14..7,
// mantissa planes 6..0).  Each plane of a block is 2048 bits (256 bytes) and is
// compressed on its own.  A 64-byte plane-index entry per block records where the
// compressed plane bundle lives in device DRAM and how long each plane is.
//
// Taken from the paper: 4 KB blocks, BF16 as the full-precision container, one
// 64 B index entry per block, 32 codec lanes, the stage latencies (front end 5,
// metadata 2, scheduler 10, tRCD 27, tCL 27, burst 4 cycles).  Everything else here
// (address widths, bank/row split, cache sizes, KV window of 16 tokens x 128 channels,
// number of precision views) is this design's own choice.
package trace_pkg;

  // ---------------- block geometry ----------------
  localparam int unsigned LINE_BYTES      = 64;
  localparam int unsigned LINE_BITS       = LINE_BYTES * 8;            // 512
  localparam int unsigned ELEM_BITS       = 16;                        // BF16 container, N_1
  localparam int unsigned NPLANES         = ELEM_BITS;                 // B = 16 planes
  localparam int unsigned BLOCK_BYTES     = 4096;
  localparam int unsigned BLOCK_ELEMS     = BLOCK_BYTES * 8 / ELEM_BITS; // m = 2048
  localparam int unsigned LINES_PER_BLOCK = BLOCK_BYTES / LINE_BYTES;    // 64
  localparam int unsigned PLANE_BYTES     = BLOCK_ELEMS / 8;             // 256
  localparam int unsigned PLANE_BITS      = BLOCK_ELEMS;                 // 2048
  localparam int unsigned PLANE_LINES     = PLANE_BYTES / LINE_BYTES;    // 4
  localparam int unsigned ELEMS_PER_LINE  = LINE_BITS / ELEM_BITS;       // 32

  // BF16 field layout (plane numbers)
  localparam int unsigned SIGN_PLANE = 15;
  localparam int unsigned EXP_BITS   = 8;   // E
  localparam int unsigned MAN_BITS   = 7;   // M
  localparam int unsigned EXP_LSB    = 7;   // exponent occupies planes 14..7

  // KV window: n tokens x C channels of BF16 fill one 4 KB block
  localparam int unsigned KV_TOKENS   = 16;   // n
  localparam int unsigned KV_CHANNELS = 128;  // C

  // ---------------- addressing ----------------
  localparam int unsigned HADDR_W  = 40;      // host byte address (1 TiB of view space)
  localparam int unsigned BLK_W    = 26;      // 2^26 blocks = 256 GiB full-precision capacity
  localparam int unsigned PADDR_W  = 33;      // device DRAM 64 B-line address (512 GiB)
  localparam int unsigned COL_W    = 4;       // 16 lines (1 KB) per DRAM row
  localparam int unsigned BANK_W   = 4;       // 16 banks
  localparam int unsigned ROW_W    = PADDR_W - COL_W - BANK_W;
  localparam int unsigned NBANKS   = 1 << BANK_W;
  localparam logic [PADDR_W-1:0] META_BASE = PADDR_W'(1) << (PADDR_W - 1); // index region
  localparam int unsigned PLEN_W   = 9;       // compressed plane length in bytes, 0..256
  localparam int unsigned NVIEWS   = 4;       // precision views P1..P4

  // ---------------- types ----------------
  typedef logic [NPLANES-1:0] plane_mask_t;

  // A precision view: keep sign + top r_e exponent planes + top r_m mantissa planes,
  // plus d_e / d_m guard planes fetched for rounding.  ret_lg = log2(1 + r_e + r_m).
  typedef struct packed {
    logic       valid;
    logic [3:0] r_e;
    logic [2:0] r_m;
    logic [3:0] d_e;
    logic [2:0] d_m;
    logic [2:0] ret_lg;       // returned element width = 2^ret_lg bits (2..4)
    logic [HADDR_W-1:0] base; // host byte address where the view's region starts
  } view_cfg_t;

  // 64-byte plane-index entry (one per 4 KB block, stored at META_BASE + block id)
  typedef struct packed {
    logic                             valid;
    logic                             kv;      // block holds KV in channel-major form
    logic                             bypass;  // every plane stored raw
    logic [NPLANES-1:0]               raw;     // plane stored uncompressed
    logic [PADDR_W-1:0]               base;    // first line of the plane bundle
    logic [NPLANES-1:0][PLEN_W-1:0]   len;     // compressed bytes per plane
  } index_entry_t;

  localparam int unsigned IDX_BITS = $bits(index_entry_t);

  localparam int unsigned TAG_W = 8;         // host request tag

  // A host request after the front end has decoded it.
  typedef struct packed {
    logic                 write;
    logic [TAG_W-1:0]     tag;
    logic                 err;      // address outside every view, or store to an alias
    logic [1:0]           view;
    logic [BLK_W-1:0]     blk;
    logic [5:0]           line;
    logic                 kv;
    logic                 raw_region;
    logic [3:0]           r_e;
    logic [2:0]           r_m;
    logic [3:0]           d_e;
    logic [2:0]           d_m;
    logic [2:0]           ret_lg;
    plane_mask_t          ret_mask;
    plane_mask_t          fetch_mask;
    logic [LINE_BITS-1:0] wdata;
  } fe_req_t;

  // Event counters of the controller.
  typedef struct packed {
    logic [31:0] reads;           // host loads answered
    logic [31:0] writes;          // host stores accepted
    logic [31:0] errors;          // requests answered with an error
    logic [31:0] commits;         // 4 KB blocks written to DRAM
    logic [31:0] idx_hits;        // plane-index cache hits
    logic [31:0] idx_misses;      // plane-index cache misses (extra DRAM read)
    logic [31:0] bypass_reads;    // reads of blocks stored entirely raw (codec skipped)
    logic [31:0] bypass_planes;   // raw planes served without decoding
    logic [31:0] planes_fetched;  // planes read from DRAM
    logic [31:0] planes_skipped;  // planes a reduced view did not read
    logic [31:0] lines_fetched;   // data lines read from DRAM
    logic [31:0] lines_written;   // data lines written to DRAM
    logic [31:0] wbuf_stalls;     // cycles a store waited for a staging slot
    logic [31:0] row_hits;        // DRAM column commands to an already open row
    logic [31:0] activates;       // DRAM row activations
  } trace_stats_t;

  typedef enum logic [1:0] {DCMD_ACT, DCMD_RD, DCMD_WR, DCMD_PRE} dram_cmd_e;

  // Lines taken by a compressed plane of len bytes.
  function automatic logic [2:0] plane_lines(input logic [PLEN_W-1:0] len);
    return 3'((len + PLEN_W'(LINE_BYTES - 1)) >> 6);
  endfunction

endpackage
