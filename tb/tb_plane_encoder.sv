// tb_plane_encoder: checks the write-path transform and bit-plane split.
//
// Random 4 KB blocks (random words, and KV-like words with per-channel exponents)
// are applied with kv = 0 and kv = 1.  Every bit of every output plane is compared
// with the reference stored_word() of tb_ref_pkg, which writes the channel-major
// regrouping and the exponent delta against token 0 element by element:
// planes[i][j] must equal bit i of stored word j.  Combinational; no latency.
module tb_plane_encoder;
  import trace_pkg::*;
  import tb_ref_pkg::*;

  logic                               kv;
  logic [BLOCK_ELEMS*ELEM_BITS-1:0]   words;
  logic [NPLANES-1:0][PLANE_BITS-1:0] planes;
  shortint unsigned                   blk [2048];
  int checks = 0;
  int failures = 0;

  plane_encoder dut (.kv, .words, .planes);

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 8; it++) begin
      for (int e = 0; e < 2048; e++) begin
        if (it % 2 == 0) blk[e] = shortint'($urandom);
        else blk[e] = shortint'((($urandom % 2) << 15) | ((80 + (e % 128) % 50 + $urandom % 4) << 7) | ($urandom % 128));
        words[e*16 +: 16] = blk[e];
      end
      kv = it[1];
      #1;
      for (int p = 0; p < 2048; p++) begin
        shortint unsigned w;
        w = stored_word(blk, kv, p);
        checks++;
        for (int i = 0; i < 16; i++)
          if (planes[i][p] !== w[i]) begin
            failures++;
            if (failures < 10) $display("FAIL: kv %0d pos %0d plane %0d", kv, p, i);
            break;
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
