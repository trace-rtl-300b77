// tb_request_frontend: checks the 5-stage request front end.
//
// Random loads and stores are sent to four configured views, to unmapped addresses,
// and stores to reduced views (which must be flagged err).  For every request the
// testbench works out the view, block, line, KV flag and fetch mask itself and
// compares them with what leaves the front end, in order.  Phase 1 keeps out_ready
// high and checks the paper's 5-cycle front-end latency: a request accepted on one
// clock edge is consumed at the output 5 edges later.  Phase 2 drops out_ready at
// random; no request may be lost, duplicated or reordered, and in_ready must follow
// the stall.
module tb_request_frontend;
  import trace_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 in_valid, in_ready, in_write, out_valid, out_ready;
  logic [HADDR_W-1:0]   in_addr;
  logic [TAG_W-1:0]     in_tag;
  logic [LINE_BITS-1:0] in_wdata;
  view_cfg_t            views [NVIEWS];
  logic [BLK_W-1:0]     kv_lo, kv_hi, raw_lo, raw_hi;
  fe_req_t              out_req;
  int checks = 0;
  int failures = 0;

  request_frontend dut (.clk, .rst_n, .in_valid, .in_ready, .in_write, .in_addr, .in_tag,
                        .in_wdata, .views, .kv_lo, .kv_hi, .raw_lo, .raw_hi, .out_valid,
                        .out_ready, .out_req);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { fe_req_t r; longint t; } exp_t;
  exp_t   q[$];
  longint cyc = 0;
  bit     phase2 = 0;
  always @(posedge clk) cyc <= cyc + 1;

  //                    re rm de dm lg
  int vc [4][5] = '{'{8, 7, 0, 0, 4}, '{4, 3, 0, 0, 3}, '{3, 0, 1, 0, 2}, '{5, 2, 0, 2, 3}};

  always @(negedge clk) begin
    #2;   // after the stimulus has settled for this cycle
    if (rst_n && out_valid && out_ready) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("FAIL: unexpected output"); end
      else begin
        e = q.pop_front();
        if (out_req.tag != e.r.tag || out_req.write != e.r.write || out_req.err != e.r.err ||
            (!e.r.err && (out_req.view != e.r.view || out_req.blk != e.r.blk ||
                          out_req.line != e.r.line || out_req.kv != e.r.kv ||
                          out_req.fetch_mask != e.r.fetch_mask || out_req.r_e != e.r.r_e ||
                          out_req.r_m != e.r.r_m || out_req.wdata != e.r.wdata))) begin
          failures++;
          $display("FAIL: tag %0d: err %0d/%0d view %0d/%0d blk %0d/%0d line %0d/%0d mask %h/%h",
                   e.r.tag, out_req.err, e.r.err, out_req.view, e.r.view, out_req.blk, e.r.blk,
                   out_req.line, e.r.line, out_req.fetch_mask, e.r.fetch_mask);
        end
        if (!phase2) begin
          checks++;
          if (cyc - e.t != 5) begin failures++; $display("FAIL: latency %0d", cyc - e.t); end
        end
      end
    end
  end

  initial begin
    in_valid = 0; in_write = 0; in_addr = '0; in_tag = '0; in_wdata = '0; out_ready = 1;
    for (int v = 0; v < NVIEWS; v++) begin
      views[v].valid = 1'b1;
      views[v].r_e = 4'(vc[v][0]); views[v].r_m = 3'(vc[v][1]);
      views[v].d_e = 4'(vc[v][2]); views[v].d_m = 3'(vc[v][3]);
      views[v].ret_lg = 3'(vc[v][4]);
      views[v].base = HADDR_W'(64'h40_0000_0000 * v);
    end
    kv_lo = 20'd10; kv_hi = 20'd20; raw_lo = 20'd30; raw_hi = 20'd40;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 2000; it++) begin
      exp_t e;
      int v, kind;
      int unsigned b, l;
      if (it == 1000) begin phase2 = 1; @(negedge clk); end
      if (phase2) out_ready = ($urandom % 3 != 0);
      v = $urandom % 4;
      kind = $urandom % 8;
      b = $urandom % 64;
      l = $urandom % (4 << vc[v][4]);
      e.r = '0;
      e.r.tag = TAG_W'(it);
      e.r.write = (kind < 3);
      e.r.wdata = {16{32'($urandom)}};
      if (kind == 7) begin
        in_addr = HADDR_W'(64'h60_1000_0000 + $urandom % 4096);  // gap after view 1
        e.r.err = 1;
      end else begin
        in_addr = HADDR_W'(64'h40_0000_0000 * v + (longint'(b) * (4 << vc[v][4]) + l) * 64);
        e.r.err = e.r.write && v != 0;
      end
      e.r.view = 2'(v); e.r.blk = BLK_W'(b); e.r.line = 6'(l);
      e.r.kv = (b >= 10 && b < 20);
      e.r.r_e = 4'(vc[v][0]); e.r.r_m = 3'(vc[v][1]);
      e.r.fetch_mask = '0;
      e.r.fetch_mask[15] = 1'b1;
      for (int i = 0; i < 8; i++) if (i < vc[v][0] + vc[v][2] || e.r.kv || e.r.write) e.r.fetch_mask[14 - i] = 1'b1;
      for (int i = 0; i < 7; i++) if (i < vc[v][1] + vc[v][3] || e.r.write) e.r.fetch_mask[6 - i] = 1'b1;
      in_valid = 1; in_write = e.r.write; in_tag = e.r.tag; in_wdata = e.r.wdata;
      #1;
      while (!in_ready) begin
        checks++;
        if (!(dut.out_valid && !out_ready)) begin failures++; $display("FAIL: in_ready low without stall"); end
        @(negedge clk);
        if (phase2) out_ready = ($urandom % 3 != 0);
        #1;
      end
      e.t = cyc;
      q.push_back(e);
      @(negedge clk);
      in_valid = 0;
    end
    out_ready = 1;
    repeat (20) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL: %0d requests lost", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
