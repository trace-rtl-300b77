// tb_lz4_compress_lane: checks one LZ4 compressor lane.
//
// Planes of several kinds are compressed: all zero, all 0xFF, long runs with short
// random gaps, the pattern of a high exponent plane, and random bytes.  For each
// plane the stream is decoded by the reference LZ4 decoder of tb_ref_pkg and must
// give back the plane exactly, its length must be below 256 bytes, and a constant
// plane must shrink to at most 16 bytes.  Random planes cannot shrink and must raise
// overflow.  Timing: done must come within 251 scan cycles + one cycle per output
// byte + a few control cycles; the cycle count is checked against that bound.
module tb_lz4_compress_lane;
  import trace_pkg::*;
  import tb_ref_pkg::*;

  logic                  clk = 1'b0;
  logic                  rst_n = 1'b0;
  logic                  start;
  logic [PLANE_BITS-1:0] in_data, out_data;
  logic                  busy, done, overflow;
  logic [PLEN_W-1:0]     out_len;
  int checks = 0;
  int failures = 0;
  always #5 clk = ~clk;

  lz4_compress_lane dut (.clk, .rst_n, .start, .in_data, .busy, .done, .out_data,
                         .out_len, .overflow);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_ovf, n_comp;
    n_ovf = 0; n_comp = 0;
    start = 1'b0; in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 60; it++) begin
      bytes_t src, enc, dec;
      int kind, cyc;
      kind = it % 5;
      src = new[256];
      for (int k = 0; k < 256; k++) begin
        case (kind)
          0: src[k] = 8'h00;
          1: src[k] = 8'hFF;
          2: src[k] = (($urandom % 16) == 0) ? 8'($urandom) : ((k / 32) % 2 ? 8'hFF : 8'h00);
          3: src[k] = (($urandom % 4) == 0) ? 8'($urandom % 4) : 8'h00;
          default: src[k] = 8'($urandom);
        endcase
        in_data[k*8 +: 8] = src[k];
      end
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc > 251 + 256 + 8) begin
        failures++;
        $display("FAIL: plane %0d took %0d cycles", it, cyc);
      end
      if (overflow) begin
        n_ovf++;
        checks++;
        if (kind != 4) begin failures++; $display("FAIL: overflow on compressible plane %0d", it); end
      end else begin
        n_comp++;
        enc = new[int'(out_len)];
        for (int k = 0; k < int'(out_len); k++) enc[k] = out_data[k*8 +: 8];
        checks++;
        if (!lz4_decode(enc, 256, dec) || dec != src || out_len >= 256) begin
          failures++;
          $display("FAIL: plane %0d kind %0d len %0d does not decode", it, kind, out_len);
        end
        checks++;
        if (kind == 4) begin failures++; $display("FAIL: random plane %0d did not overflow", it); end
        if ((kind == 0 || kind == 1) && out_len > 16) begin
          failures++;
          $display("FAIL: constant plane compressed to %0d bytes", out_len);
        end
      end
    end
    $display("compressed %0d planes, %0d overflowed", n_comp, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
