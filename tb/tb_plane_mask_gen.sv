// tb_plane_mask_gen: exhaustive check of the plane-mask generator.
//
// Sweeps every view the 4-bit / 3-bit fields can express (r_e 0..8, r_m 0..7,
// d_e 0..8, d_m 0..7, weight and KV blocks) and compares both masks with a reference
// built plane by plane: the sign plane (15) is always kept, exponent plane 14-i is
// kept for i < r_e, mantissa plane 6-i for i < r_m; guard planes extend each run by
// d_e / d_m, clipped to the field; a KV block fetches all eight exponent planes.
// Combinational block, so no latency applies; the watchdog only guards the loop.
module tb_plane_mask_gen;
  import trace_pkg::*;

  logic [3:0]  r_e, d_e;
  logic [2:0]  r_m, d_m;
  logic        kv;
  plane_mask_t ret_mask, fetch_mask;
  int checks = 0;
  int failures = 0;

  plane_mask_gen dut (.r_e, .r_m, .d_e, .d_m, .kv, .ret_mask, .fetch_mask);

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 2; k++)
      for (int re = 0; re <= 8; re++)
        for (int rm = 0; rm <= 7; rm++)
          for (int de = 0; de <= 8; de++)
            for (int dm = 0; dm <= 7; dm++) begin
              plane_mask_t er, ef;
              r_e = 4'(re); r_m = 3'(rm); d_e = 4'(de); d_m = 3'(dm); kv = k[0];
              #1;
              er = '0; ef = '0;
              er[15] = 1'b1; ef[15] = 1'b1;
              for (int i = 0; i < 8; i++) begin
                if (i < re) er[14 - i] = 1'b1;
                if (i < re + de || k == 1) ef[14 - i] = 1'b1;
              end
              for (int i = 0; i < 7; i++) begin
                if (i < rm) er[6 - i] = 1'b1;
                if (i < rm + dm) ef[6 - i] = 1'b1;
              end
              checks++;
              if (ret_mask !== er || fetch_mask !== ef) begin
                failures++;
                if (failures < 10)
                  $display("FAIL: re %0d rm %0d de %0d dm %0d kv %0d: ret %h/%h fetch %h/%h",
                           re, rm, de, dm, k, ret_mask, er, fetch_mask, ef);
              end
            end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
