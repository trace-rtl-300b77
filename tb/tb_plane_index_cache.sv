// tb_plane_index_cache: checks the plane-index cache.
//
// A reference map of (block -> entry) for the cached sets is kept here.  Random
// updates and lookups are interleaved, including blocks that share a set, and each
// lookup's hit flag and entry are compared with the reference.  The paper gives a
// 2-cycle hit: lk_done must come exactly 2 cycles after lk_valid.  Lookups are
// issued back to back to check the pipelining, and the hit / miss counters must
// match the reference counts.
module tb_plane_index_cache;
  import trace_pkg::*;

  localparam int SETS = 256;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             lk_valid, lk_done, lk_hit, up_valid;
  logic [BLK_W-1:0] lk_blk, up_blk;
  index_entry_t     lk_entry, up_entry;
  logic [31:0]      hits, misses;
  int checks = 0;
  int failures = 0;

  plane_index_cache dut (.clk, .rst_n, .lk_valid, .lk_blk, .lk_done, .lk_hit, .lk_entry,
                         .up_valid, .up_blk, .up_entry, .hits, .misses);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: per set, the block held and its entry
  bit           ref_v [SETS];
  int unsigned  ref_b [SETS];
  index_entry_t ref_e [SETS];

  typedef struct { int unsigned b; bit hit; index_entry_t e; longint t; } pend_t;
  pend_t  pq[$];
  longint cyc = 0;
  int     n_hit = 0, n_miss = 0;

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) begin
    if (rst_n && lk_done) begin
      pend_t p;
      checks++;
      if (pq.size() == 0) begin failures++; $display("FAIL: lk_done without lookup"); end
      else begin
        p = pq.pop_front();
        if (cyc - p.t != 2) begin failures++; $display("FAIL: lookup latency %0d", cyc - p.t); end
        if (lk_hit != p.hit || (p.hit && lk_entry != p.e)) begin
          failures++; $display("FAIL: blk %0d hit %0d/%0d", p.b, lk_hit, p.hit);
        end
      end
    end
  end

  function automatic index_entry_t rnd_entry();
    index_entry_t e;
    e = '0;
    e.valid = 1'b1;
    e.kv = 1'($urandom);
    e.raw = 16'($urandom);
    e.base = PADDR_W'($urandom);
    for (int p = 0; p < NPLANES; p++) e.len[p] = PLEN_W'(1 + $urandom % 256);
    return e;
  endfunction

  initial begin
    lk_valid = 0; lk_blk = '0; up_valid = 0; up_blk = '0; up_entry = '0;
    foreach (ref_v[s]) ref_v[s] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 3000; it++) begin
      int unsigned b;
      int s;
      b = (($urandom % 4) * SETS) + ($urandom % 16);   // 4 blocks compete for each of 16 sets
      s = int'(b % SETS);
      lk_valid = 0; up_valid = 0;
      if ($urandom % 3 == 0) begin
        up_valid = 1; up_blk = BLK_W'(b); up_entry = rnd_entry();
      end else begin
        pend_t p;
        lk_valid = 1; lk_blk = BLK_W'(b);
        p.b = b; p.t = cyc; p.hit = ref_v[s] && ref_b[s] == b; p.e = ref_e[s];
        if (p.hit) n_hit++; else n_miss++;
        pq.push_back(p);
      end
      @(negedge clk);
      if (up_valid) begin ref_v[s] = 1; ref_b[s] = b; ref_e[s] = up_entry; end
    end
    lk_valid = 0; up_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (hits != 32'(n_hit) || misses != 32'(n_miss) || pq.size() != 0) begin
      failures++; $display("FAIL: counters %0d/%0d %0d/%0d", hits, n_hit, misses, n_miss);
    end
    $display("hits %0d misses %0d", n_hit, n_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
