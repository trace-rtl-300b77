// tb_lz4_decompress_lane: checks one LZ4 decompressor lane.
//
// Streams come from the reference greedy encoder of tb_ref_pkg, which uses any match
// offset (repeating patterns of period 1, 3, 7, 40 and 100 bytes, random planes that
// end up as one literal run), so the lane is tested on streams it did not produce.
// The decoded plane must equal the source.  Raw planes must be copied unchanged in
// one cycle after start (done on the next edge).  A stream with a zero match offset and
// a stream that ends short of 256 bytes must raise err.  Timing: a compressed plane
// must finish within one cycle per input byte plus one per output byte plus a few.
module tb_lz4_decompress_lane;
  import trace_pkg::*;
  import tb_ref_pkg::*;

  logic                  clk = 1'b0;
  logic                  rst_n = 1'b0;
  logic                  start, raw, busy, done, err;
  logic [PLANE_BITS-1:0] in_data, out_data;
  logic [PLEN_W-1:0]     in_len;
  int checks = 0;
  int failures = 0;
  always #5 clk = ~clk;

  lz4_decompress_lane dut (.clk, .rst_n, .start, .in_data, .in_len, .raw, .busy, .done,
                           .out_data, .err);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input bytes_t s, input bit r, output int cyc);
    in_data = '0;
    foreach (s[k]) in_data[k*8 +: 8] = s[k];
    in_len = PLEN_W'(s.size());
    raw = r;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  int per [5] = '{1, 3, 7, 40, 100};

  initial begin
    start = 1'b0; raw = 1'b0; in_data = '0; in_len = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 40; it++) begin
      bytes_t src, enc;
      int cyc, p;
      src = new[256];
      p = per[it % 5];
      for (int k = 0; k < 256; k++)
        src[k] = (it % 8 == 7) ? 8'($urandom) : (k < p ? 8'($urandom) : src[k - p]);
      if (it % 4 == 3) for (int k = 0; k < 256; k += 37) src[k] = 8'($urandom);
      enc = lz4_encode(src);
      if (enc.size() >= 256) begin
        run(src, 1'b1, cyc);
        checks++;
        if (cyc != 1 || err) begin failures++; $display("FAIL: raw copy took %0d cycles", cyc); end
      end else begin
        run(enc, 1'b0, cyc);
        checks++;
        if (cyc > enc.size() + 256 + 4) begin failures++; $display("FAIL: decode took %0d cycles", cyc); end
      end
      checks++;
      for (int k = 0; k < 256; k++)
        if (out_data[k*8 +: 8] != src[k] || err) begin
          failures++;
          $display("FAIL: plane %0d (period %0d) byte %0d err %0d", it, p, k, err);
          break;
        end
    end
    begin
      bytes_t bad;
      int cyc;
      // token: 1 literal, match; offset 0
      bad = new[5];
      bad[0] = 8'h1F; bad[1] = 8'hAA; bad[2] = 8'h00; bad[3] = 8'h00; bad[4] = 8'h00;
      run(bad, 1'b0, cyc);
      checks++;
      if (!err) begin failures++; $display("FAIL: zero offset not flagged"); end
      // a literal-only stream of 10 bytes: too short
      bad = new[11];
      bad[0] = 8'hA0;
      for (int k = 1; k < 11; k++) bad[k] = 8'(k);
      run(bad, 1'b0, cyc);
      checks++;
      if (!err) begin failures++; $display("FAIL: short stream not flagged"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
