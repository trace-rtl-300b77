// tb_alias_decoder: checks the host-address to (view, block, line) decode.
//
// Four views are placed at separate bases with element widths of 16, 8, 4 and 8 bits.
// For random blocks and lines of each view the address is built as
// base + (block * 4N + line) * 64 + byte offset and the decoder must return that view,
// block and line, and classify the block against the KV and uncompressed ranges.
// Addresses just past a view's region (L*N/16 bytes, L = 256 GiB of BF16) and below
// the first base must miss.  Combinational block; no latency applies.
module tb_alias_decoder;
  import trace_pkg::*;

  logic [HADDR_W-1:0] addr;
  view_cfg_t          views [NVIEWS];
  logic [BLK_W-1:0]   kv_lo, kv_hi, raw_lo, raw_hi;
  logic               hit, is_kv, is_raw;
  logic [1:0]         view;
  logic [BLK_W-1:0]   blk;
  logic [5:0]         line;
  localparam int CAP_LG = BLK_W + 12;   // log2 of the full-precision bytes
  int checks = 0;
  int failures = 0;

  alias_decoder dut (.addr, .views, .kv_lo, .kv_hi, .raw_lo, .raw_hi,
                     .hit, .view, .blk, .line, .is_kv, .is_raw);

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint unsigned base [NVIEWS] = '{64'h40_0000_0000, 64'h80_0000_0000, 64'hA0_0000_0000, 64'hC0_0000_0000};
  int              lg   [NVIEWS] = '{4, 3, 2, 3};

  initial begin
    for (int v = 0; v < NVIEWS; v++) begin
      views[v] = '0;
      views[v].valid  = 1'b1;
      views[v].ret_lg = 3'(lg[v]);
      views[v].base   = HADDR_W'(base[v]);
    end
    kv_lo = 20'd100; kv_hi = 20'd200; raw_lo = 20'd5000; raw_hi = 20'd5010;

    for (int it = 0; it < 4000; it++) begin
      int v;
      int unsigned b, l, nl;
      v  = it % NVIEWS;
      nl = 4 << lg[v];
      case (it % 5)
        0: b = 100 + $urandom % 100;
        1: b = 5000 + $urandom % 10;
        2: b = (1 << BLK_W) - 1;
        default: b = $urandom % (1 << BLK_W);
      endcase
      l = $urandom % nl;
      addr = HADDR_W'(base[v] + (longint'(b) * nl + l) * 64 + $urandom % 64);
      #1;
      checks++;
      if (!hit || view != 2'(v) || blk != BLK_W'(b) || line != 6'(l) ||
          is_kv != (b >= 100 && b < 200) || is_raw != (b >= 5000 && b < 5010)) begin
        failures++;
        if (failures < 10)
          $display("FAIL: view %0d blk %0d line %0d -> hit %0d view %0d blk %0d line %0d kv %0d raw %0d",
                   v, b, l, hit, view, blk, line, is_kv, is_raw);
      end
    end
    // misses: below the first base, and just past the end of views 1 (before view 2)
    addr = HADDR_W'(base[0] - 64);
    #1; checks++; if (hit) begin failures++; $display("FAIL: hit below first base"); end
    addr = HADDR_W'(base[3] + (64'd1 << (CAP_LG - 4 + lg[3])));
    #1; checks++; if (hit) begin failures++; $display("FAIL: hit past last view"); end
    addr = HADDR_W'(base[1] + (64'd1 << (CAP_LG - 4 + lg[1])) - 1);
    #1; checks++; if (!hit || view != 2'd1) begin failures++; $display("FAIL: last byte of view 1"); end
    // an invalid view never hits
    views[2].valid = 1'b0;
    addr = HADDR_W'(base[2] + 128);
    #1; checks++; if (hit) begin failures++; $display("FAIL: disabled view hit"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
