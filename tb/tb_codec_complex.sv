// tb_codec_complex: checks the 16+16-lane codec complex.
//
// Compress side: a block of 16 planes mixing constant, run-rich and random planes is
// compressed; each plane's stream must decode (reference decoder) to the input, a
// plane marked raw must carry the input bytes with length 256, and random planes
// must be raw.  With c_nocomp every plane must come back raw, at once.
// Decompress side: the compressed block is fed back with a fetch mask; every masked
// plane must be restored, and the count of raw planes served without decoding
// (bypass_planes) must grow by the number of masked raw planes.  Timing: the
// lanes run in parallel, so a block must finish within one plane's time (about
// 251 + 256 cycles to compress, 512 to decode), which the cycle counts check.
module tb_codec_complex;
  import trace_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                               c_start, c_nocomp, c_busy, c_done;
  logic [NPLANES-1:0][PLANE_BITS-1:0] c_planes, c_data;
  logic [NPLANES-1:0][PLEN_W-1:0]     c_len;
  logic [NPLANES-1:0]                 c_raw;
  logic                               d_start, d_busy, d_done, d_err;
  logic [NPLANES-1:0][PLANE_BITS-1:0] d_planes, d_out;
  logic [NPLANES-1:0][PLEN_W-1:0]     d_len;
  logic [NPLANES-1:0]                 d_raw;
  plane_mask_t                        d_mask;
  logic [31:0]                        bypass_planes;
  int checks = 0;
  int failures = 0;

  codec_complex dut (.clk, .rst_n, .c_start, .c_nocomp, .c_planes, .c_busy, .c_done,
                     .c_data, .c_len, .c_raw, .d_start, .d_planes, .d_len, .d_raw, .d_mask,
                     .d_busy, .d_done, .d_out, .d_err, .bypass_planes);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    c_start = 0; c_nocomp = 0; c_planes = '0; d_start = 0; d_planes = '0; d_len = '0;
    d_raw = '0; d_mask = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 6; it++) begin
      int cyc, nraw;
      logic [31:0] bp0;
      for (int p = 0; p < NPLANES; p++)
        for (int k = 0; k < 256; k++)
          c_planes[p][k*8 +: 8] = (p < 7) ? 8'($urandom) :
                                  (p == 15 || p < 10) ? ((($urandom % 8) == 0) ? 8'($urandom) : 8'h00) :
                                  8'h00;
      c_nocomp = (it == 5);
      @(negedge clk); c_start = 1'b1;
      @(negedge clk); c_start = 1'b0;
      cyc = 1;
      while (!c_done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc > (c_nocomp ? 3 : 251 + 256 + 8)) begin
        failures++; $display("FAIL: compress took %0d cycles", cyc);
      end
      for (int p = 0; p < NPLANES; p++) begin
        checks++;
        if (c_raw[p]) begin
          if (c_len[p] != 256 || c_data[p] != c_planes[p] || (!c_nocomp && p >= 10 && p != 15)) begin
            failures++; $display("FAIL: raw plane %0d len %0d", p, c_len[p]);
          end
        end else begin
          bytes_t enc, dec, src;
          enc = new[int'(c_len[p])];
          src = new[256];
          for (int k = 0; k < int'(c_len[p]); k++) enc[k] = c_data[p][k*8 +: 8];
          for (int k = 0; k < 256; k++) src[k] = c_planes[p][k*8 +: 8];
          if (c_nocomp || p < 7 || !lz4_decode(enc, 256, dec) || dec != src) begin
            failures++; $display("FAIL: plane %0d stream wrong (len %0d)", p, c_len[p]);
          end
        end
      end
      // decompress what was produced, masked
      d_planes = c_data; d_len = c_len; d_raw = c_raw;
      d_mask = (it % 2) ? 16'hFFFF : 16'hF800;    // all planes, or sign + 4 exponent planes
      nraw = $countones(c_raw & d_mask);
      bp0 = bypass_planes;
      @(negedge clk); d_start = 1'b1;
      @(negedge clk); d_start = 1'b0;
      cyc = 1;
      while (!d_done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc > 256 + 256 + 8 || d_err) begin failures++; $display("FAIL: decode %0d cycles err %0d", cyc, d_err); end
      for (int p = 0; p < NPLANES; p++)
        if (d_mask[p]) begin
          checks++;
          if (d_out[p] != c_planes[p]) begin failures++; $display("FAIL: decoded plane %0d", p); end
        end
      checks++;
      if (bypass_planes - bp0 != 32'(nraw)) begin
        failures++; $display("FAIL: bypass count %0d expected %0d", bypass_planes - bp0, nraw);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
