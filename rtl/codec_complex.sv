// codec_complex: the parallel codec lanes of stage 3.
//
// The paper's codec complex has 32 lanes around the bit-plane engine, serving the KV /
// weight write path (compress) and the read path (decompress).  Here LANES/2 lanes
// compress and LANES/2 lanes decompress, one lane per bit-plane of a 4 KB block, so a
// whole block's 16 planes are handled in parallel in each direction and a commit can
// run while a read is being decoded.  This split of the 32 lanes is this design's
// choice.
//
// Compress side: c_start with the 16 planes of a block.  Each plane goes to its own
// lz4_compress_lane.  A plane whose stream would not be shorter than 256 bytes is
// kept raw; with c_nocomp (an uncompressed region) every plane is kept raw without
// running the lanes.  c_done pulses once all planes are finished, with c_data /
// c_len / c_raw valid from then until the next c_start.
//
// Decompress side: d_start with the stored planes, their lengths, raw flags and the
// fetch mask.  Planes outside the mask are not decoded (their d_out is stale and the
// reconstruction stage zeroes them by the same mask); raw planes
// bypass the decoder (copied in one cycle); the rest are decoded in parallel.
// d_done pulses when all masked planes are done; d_out and d_err hold until the next
// d_start.  bypass_planes counts planes served raw on the read side.
//
// Lint note: the reset of the 32768-bit block registers is written as '0, which Verilator
// reports as a replication above its default limit (WIDTHCONCAT); it is a plain
// clear of a wide register and stands as written.
module codec_complex
  import trace_pkg::*;
#(
  parameter int unsigned LANES = 32
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // compress
  input  logic                               c_start,
  input  logic                               c_nocomp,
  input  logic [NPLANES-1:0][PLANE_BITS-1:0] c_planes,
  output logic                               c_busy,
  output logic                               c_done,
  output logic [NPLANES-1:0][PLANE_BITS-1:0] c_data,
  output logic [NPLANES-1:0][PLEN_W-1:0]     c_len,
  output logic [NPLANES-1:0]                 c_raw,
  // decompress
  input  logic                               d_start,
  input  logic [NPLANES-1:0][PLANE_BITS-1:0] d_planes,
  input  logic [NPLANES-1:0][PLEN_W-1:0]     d_len,
  input  logic [NPLANES-1:0]                 d_raw,
  input  plane_mask_t                        d_mask,
  output logic                               d_busy,
  output logic                               d_done,
  output logic [NPLANES-1:0][PLANE_BITS-1:0] d_out,
  output logic                               d_err,
  output logic [31:0]                        bypass_planes
);

  localparam int unsigned HALF = LANES / 2;

  initial assert (HALF == NPLANES) else $error("codec_complex: LANES/2 must equal NPLANES");

  // ---------------- compress side ----------------
  logic [NPLANES-1:0] cl_done, cl_busy, cl_ovf;
  logic [NPLANES-1:0][PLANE_BITS-1:0] cl_out;
  logic [NPLANES-1:0][PLEN_W-1:0]     cl_len;
  logic [NPLANES-1:0][PLANE_BITS-1:0] c_in_q;
  logic [NPLANES-1:0] c_pend;
  logic               c_run, c_forced;

  for (genvar i = 0; i < NPLANES; i++) begin : g_comp
    lz4_compress_lane u_lane (
      .clk(clk), .rst_n(rst_n), .start(c_start && !c_nocomp), .in_data(c_planes[i]),
      .busy(cl_busy[i]), .done(cl_done[i]), .out_data(cl_out[i]), .out_len(cl_len[i]),
      .overflow(cl_ovf[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_pend <= '0; c_run <= 1'b0; c_done <= 1'b0; c_in_q <= '0; c_forced <= 1'b0;
    end else begin
      c_done <= 1'b0;
      if (c_start) begin
        c_in_q   <= c_planes;
        c_forced <= c_nocomp;
        if (c_nocomp) c_done <= 1'b1;
        else begin
          c_pend <= '1;
          c_run  <= 1'b1;
        end
      end else if (c_run) begin
        if ((c_pend & ~cl_done) == '0) begin
          c_run  <= 1'b0;
          c_done <= 1'b1;
        end
        c_pend <= c_pend & ~cl_done;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < NPLANES; i++) begin
      c_raw[i]  = c_forced || cl_ovf[i];
      c_data[i] = c_raw[i] ? c_in_q[i] : cl_out[i];
      c_len[i]  = c_raw[i] ? PLEN_W'(PLANE_BYTES) : cl_len[i];
    end
  end
  assign c_busy = c_run;

  // ---------------- decompress side ----------------
  logic [NPLANES-1:0] dl_done, dl_busy, dl_err, d_pend, d_errs;
  logic               d_run;

  for (genvar i = 0; i < NPLANES; i++) begin : g_dec
    lz4_decompress_lane u_lane (
      .clk(clk), .rst_n(rst_n), .start(d_start && d_mask[i]), .in_data(d_planes[i]),
      .in_len(d_len[i]), .raw(d_raw[i]), .busy(dl_busy[i]), .done(dl_done[i]),
      .out_data(d_out[i]), .err(dl_err[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_pend <= '0; d_run <= 1'b0; d_done <= 1'b0; d_errs <= '0; bypass_planes <= '0;
    end else begin
      d_done <= 1'b0;
      if (d_start) begin
        d_pend <= d_mask;
        d_errs <= '0;
        d_run  <= 1'b1;
        bypass_planes <= bypass_planes + 32'($countones(d_mask & d_raw));
      end else if (d_run) begin
        if ((d_pend & ~dl_done) == '0) begin
          d_run  <= 1'b0;
          d_done <= 1'b1;
        end
        d_pend <= d_pend & ~dl_done;
        d_errs <= d_errs | (dl_done & dl_err);
      end
    end
  end

  assign d_err  = |d_errs;
  assign d_busy = d_run;

endmodule
