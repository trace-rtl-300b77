// tb_plane_reconstruct: checks the read-path reconstruction of one host line.
//
// Planes are produced from a random block by the reference transform of tb_ref_pkg
// (not by the encoder), planes outside the fetch mask are filled with random garbage
// that the block must ignore, and for each view (P1, E4M3 truncated, FP4 exponent-only
// with one exponent guard plane, E5M2 with two mantissa guard planes, E2M1 with
// guard planes) and several lines the packed line is compared with view_code() of the
// original words, for weight and KV blocks.  Combinational; no latency.
module tb_plane_reconstruct;
  import trace_pkg::*;
  import tb_ref_pkg::*;

  logic [NPLANES-1:0][PLANE_BITS-1:0] planes;
  plane_mask_t                        fetch_mask;
  logic                               kv;
  logic [3:0]                         r_e, d_e;
  logic [2:0]                         r_m, d_m, ret_lg;
  logic [5:0]                         line;
  logic [LINE_BITS-1:0]               data;
  shortint unsigned                   blk [2048];
  int checks = 0;
  int failures = 0;

  plane_reconstruct dut (.planes, .fetch_mask, .kv, .r_e, .r_m, .d_e, .d_m, .ret_lg,
                         .line, .data);

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  //                       re rm de dm lg
  int vcfg [5][5] = '{'{8, 7, 0, 0, 4}, '{4, 3, 0, 0, 3}, '{3, 0, 1, 0, 2},
                      '{5, 2, 0, 2, 3}, '{2, 1, 0, 3, 2}};

  initial begin
    for (int it = 0; it < 4; it++) begin
      kv = it[0];
      for (int e = 0; e < 2048; e++)
        blk[e] = (it < 2) ? shortint'((($urandom % 2) << 15) | ((100 + (e % 128) % 20 + $urandom % 3) << 7) | ($urandom % 128))
                          : shortint'($urandom);
      for (int v = 0; v < 5; v++) begin
        int re, rm, de, dm, lg, nl, epl;
        re = vcfg[v][0]; rm = vcfg[v][1]; de = vcfg[v][2]; dm = vcfg[v][3]; lg = vcfg[v][4];
        r_e = 4'(re); r_m = 3'(rm); d_e = 4'(de); d_m = 3'(dm); ret_lg = 3'(lg);
        fetch_mask = '0;
        fetch_mask[15] = 1'b1;
        for (int i = 0; i < 8; i++) if (i < re + de || kv) fetch_mask[14 - i] = 1'b1;
        for (int i = 0; i < 7; i++) if (i < rm + dm) fetch_mask[6 - i] = 1'b1;
        for (int p = 0; p < 2048; p++) begin
          shortint unsigned w;
          w = stored_word(blk, kv, p);
          for (int i = 0; i < 16; i++) planes[i][p] = fetch_mask[i] ? w[i] : 1'($urandom);
        end
        nl  = 4 << lg;
        epl = 512 >> lg;
        for (int t = 0; t < 6; t++) begin
          logic [LINE_BITS-1:0] exp_d;
          int l;
          l = (t == 0) ? 0 : (t == 1) ? nl - 1 : int'($urandom % nl);
          line = 6'(l);
          #1;
          exp_d = '0;
          for (int k = 0; k < epl; k++) begin
            int unsigned c;
            c = view_code(blk[l*epl + k], re, rm, de, dm);
            for (int b = 0; b < (1 << lg); b++) exp_d[k*(1 << lg) + b] = c[b];
          end
          checks++;
          if (data !== exp_d) begin
            failures++;
            if (failures < 10) $display("FAIL: kv %0d view %0d line %0d", kv, v, l);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
