// tb_staging_buffer: checks the write staging buffer.
//
// 1. A block is stored line by line in token order; after each group of 4 lines the
//    slot's window index (complete KV tokens) must have grown by one.  The cycle after
//    the 64th line, out_valid must rise with the block's id, flags and all 64 lines in
//    place, and q_pending must report the block.  The block is taken and released.
// 2. Four blocks are opened with partial data; a store to a fifth block must be held
//    (wr_ready low, stall counter counting).  Completing, taking and releasing one
//    block frees its slot and the held store goes in.
// 3. Lines of a block arriving in random order are assembled correctly.
module tb_staging_buffer;
  import trace_pkg::*;

  localparam int SLOTS = 4;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                             wr_valid, wr_ready, wr_kv, wr_raw;
  logic [BLK_W-1:0]                 wr_blk, out_blk, q_blk;
  logic [5:0]                       wr_line;
  logic [LINE_BITS-1:0]             wr_data;
  logic                             out_valid, out_ready, out_kv, out_raw, rel_valid, q_pending;
  logic [1:0]                       out_slot, rel_slot;
  logic [BLOCK_ELEMS*ELEM_BITS-1:0] out_data;
  logic [4:0]                       window_idx [SLOTS];
  logic [31:0]                      stalls;
  int checks = 0;
  int failures = 0;

  staging_buffer dut (.clk, .rst_n, .wr_valid, .wr_ready, .wr_blk, .wr_line, .wr_data,
                      .wr_kv, .wr_raw, .out_valid, .out_ready, .out_slot, .out_blk, .out_kv,
                      .out_raw, .out_data, .rel_valid, .rel_slot, .q_blk, .q_pending,
                      .window_idx, .stalls);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [LINE_BITS-1:0] pat(int b, int l);
    return {16{32'(b * 1000 + l * 7 + 1)}};
  endfunction

  task automatic store(int b, int l, bit kv, bit raw);
    @(negedge clk);
    wr_valid = 1; wr_blk = BLK_W'(b); wr_line = 6'(l); wr_data = pat(b, l); wr_kv = kv; wr_raw = raw;
    #1;
    while (!wr_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    wr_valid = 0;
  endtask

  task automatic take_and_check(int b, bit kv, bit raw);
    int slot;
    @(negedge clk);
    checks++;
    if (!out_valid || out_blk != BLK_W'(b) || out_kv != kv || out_raw != raw) begin
      failures++; $display("FAIL: block %0d not offered (valid %0d blk %0d)", b, out_valid, out_blk);
    end
    for (int l = 0; l < 64; l++) begin
      checks++;
      if (out_data[l*LINE_BITS +: LINE_BITS] != pat(b, l)) begin
        failures++; $display("FAIL: block %0d line %0d", b, l);
      end
    end
    q_blk = BLK_W'(b);
    #1;
    checks++;
    if (!q_pending) begin failures++; $display("FAIL: q_pending low for full block %0d", b); end
    slot = int'(out_slot);
    out_ready = 1;
    @(negedge clk);
    out_ready = 0;
    #1;
    checks++;
    if (!q_pending) begin failures++; $display("FAIL: q_pending low while committing %0d", b); end
    repeat (3) @(negedge clk);
    rel_valid = 1; rel_slot = 2'(slot);
    @(negedge clk);
    rel_valid = 0;
    #1;
    checks++;
    if (q_pending) begin failures++; $display("FAIL: q_pending high after release %0d", b); end
  endtask

  initial begin
    int perm [64];
    wr_valid = 0; wr_blk = '0; wr_line = '0; wr_data = '0; wr_kv = 0; wr_raw = 0;
    out_ready = 0; rel_valid = 0; rel_slot = '0; q_blk = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. token-ordered KV stores and the window index
    for (int l = 0; l < 64; l++) begin
      store(7, l, 1, 0);
      if (l % 4 == 3) begin
        checks++;
        if (window_idx[0] != 5'((l + 1) / 4)) begin
          failures++; $display("FAIL: window index %0d after %0d lines", window_idx[0], l + 1);
        end
      end
      if (l < 63) begin
        checks++;
        if (out_valid) begin failures++; $display("FAIL: block offered early"); end
      end
    end
    take_and_check(7, 1, 0);

    // 2. four partial blocks, a fifth must stall
    for (int b = 0; b < 4; b++)
      for (int l = 0; l < 10; l++) store(100 + b, l, 0, b == 3);
    @(negedge clk);
    wr_valid = 1; wr_blk = BLK_W'(200); wr_line = 0; wr_data = pat(200, 0);
    repeat (5) @(negedge clk);
    checks++;
    if (wr_ready || stalls < 4) begin failures++; $display("FAIL: no stall (stalls %0d)", stalls); end
    wr_valid = 0;
    for (int l = 10; l < 64; l++) store(103, l, 0, 1);
    take_and_check(103, 0, 1);
    store(200, 0, 0, 0);
    checks++;
    if (dut.used != 4'hF) begin failures++; $display("FAIL: held store did not take the freed slot"); end

    // 3. random order
    for (int l = 0; l < 64; l++) perm[l] = l;
    perm.shuffle();
    for (int l = 0; l < 64; l++) store(101, perm[l], 0, 0);
    take_and_check(101, 0, 0);

    $display("stall cycles %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
