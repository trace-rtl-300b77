// tb_plane_scheduler: checks the plane-aware DRAM scheduler against the behavioural
// DRAM model (which counts tRCD and open-row violations).
//
// 1. Latency.  An isolated read to a closed bank must return after exactly
//    SCHED_LAT + tRCD + tCL + burst = 10 + 27 + 27 + 4 = 68 cycles, the scheduling
//    and DRAM part of the paper's load path; a following read to the open row after
//    SCHED_LAT + tCL + burst = 41 cycles.
// 2. Row-hit first.  Reads to rows R, R' and R of one closed bank are queued while
//    the bank opens R: the second read of R must come back before the read of R'.
// Latencies are counted from the clock edge that accepts the request to the edge
// that presents resp_valid.
// 3. Random traffic: writes and reads to lines spread over banks and a few rows; each
//    read (matched by tag) must return the last data written to its line, every read
//    must be answered, and the DRAM model must report no violation.
module tb_plane_scheduler;
  import trace_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 req_valid, req_ready, req_write, resp_valid;
  logic [PADDR_W-1:0]   req_addr;
  logic [LINE_BITS-1:0] req_wdata, resp_data;
  logic [7:0]           req_tag, resp_tag;
  logic                 dram_cmd_valid, dram_rvalid;
  dram_cmd_e            dram_cmd;
  logic [BANK_W-1:0]    dram_bank;
  logic [ROW_W-1:0]     dram_row;
  logic [COL_W-1:0]     dram_col;
  logic [LINE_BITS-1:0] dram_wdata, dram_rdata;
  logic [31:0]          row_hits, activates, col_cmds;
  int                   dviol, dreads, dwrites;
  int checks = 0;
  int failures = 0;

  plane_scheduler dut (.clk, .rst_n, .req_valid, .req_ready, .req_write, .req_addr,
                       .req_wdata, .req_tag, .resp_valid, .resp_tag, .resp_data,
                       .dram_cmd_valid, .dram_cmd, .dram_bank, .dram_row, .dram_col,
                       .dram_wdata, .dram_rvalid, .dram_rdata, .row_hits, .activates,
                       .col_cmds);

  dram_model u_dram (.clk, .rst_n, .cmd_valid(dram_cmd_valid), .cmd(dram_cmd),
                     .bank(dram_bank), .row(dram_row), .col(dram_col), .wdata(dram_wdata),
                     .rvalid(dram_rvalid), .rdata(dram_rdata), .violations(dviol),
                     .reads(dreads), .writes(dwrites));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [LINE_BITS-1:0] ref_mem [logic [PADDR_W-1:0]];
  logic [LINE_BITS-1:0] exp_d   [int];
  longint               t_acc   [int];
  int                   order[$];
  longint               last_lat;

  always @(negedge clk) begin
    if (rst_n && resp_valid) begin
      checks++;
      if (!exp_d.exists(int'(resp_tag))) begin failures++; $display("FAIL: stray tag %0d", resp_tag); end
      else begin
        if (resp_data != exp_d[int'(resp_tag)]) begin
          failures++; $display("FAIL: read tag %0d wrong data", resp_tag);
        end
        last_lat = cyc - t_acc[int'(resp_tag)] - 1;
        order.push_back(int'(resp_tag));
        exp_d.delete(int'(resp_tag));
      end
    end
  end

  // acceptance edge of each read, sampled on that clock edge
  always @(posedge clk) if (rst_n && req_valid && req_ready && !req_write) t_acc[int'(req_tag)] = cyc;

  function automatic logic [PADDR_W-1:0] la(int row, int bank, int col);
    return PADDR_W'((row << (BANK_W + COL_W)) | (bank << COL_W) | col);
  endfunction

  task automatic issue(bit wr, logic [PADDR_W-1:0] a, int tag);
    @(negedge clk);
    req_valid = 1; req_write = wr; req_addr = a; req_tag = 8'(tag);
    req_wdata = wr ? {16{32'($urandom)}} : '0;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    if (wr) ref_mem[a] = req_wdata;
    else begin
      exp_d[tag] = ref_mem.exists(a) ? ref_mem[a] : '0;
    end
    @(negedge clk);
    req_valid = 0;
  endtask

  task automatic wait_idle();
    while (exp_d.size() != 0) @(negedge clk);
    repeat (40) @(negedge clk);
  endtask

  initial begin
    req_valid = 0; req_write = 0; req_addr = '0; req_tag = '0; req_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. latency, closed bank then open row
    issue(0, la(5, 3, 1), 1);
    wait_idle();
    checks++;
    if (last_lat != 68) begin failures++; $display("FAIL: closed-bank read latency %0d, expected 68", last_lat); end
    issue(0, la(5, 3, 2), 2);
    wait_idle();
    checks++;
    if (last_lat != 41) begin failures++; $display("FAIL: open-row read latency %0d, expected 41", last_lat); end

    // 2. row-hit first: bank 4 is closed, so while it waits tRCD for row 5 the reads
    //    to row 9 and to row 5 queue up behind the first one
    order.delete();
    issue(0, la(5, 4, 3), 10);
    issue(0, la(9, 4, 0), 11);
    issue(0, la(5, 4, 4), 12);
    wait_idle();
    checks++;
    if (order.size() != 3 || order[0] != 10 || order[1] != 12 || order[2] != 11) begin
      failures++; $display("FAIL: row-hit order %p", order);
    end

    // 3. random traffic
    for (int it = 0; it < 1500; it++) begin
      logic [PADDR_W-1:0] a;
      a = la($urandom % 3, $urandom % 16, $urandom % 16);
      if ($urandom % 2) issue(1, a, 0);
      else begin
        int tag;
        tag = 20 + it % 200;
        while (exp_d.exists(tag)) @(negedge clk);
        issue(0, a, tag);
      end
    end
    wait_idle();
    checks++;
    if (dviol != 0) begin failures++; $display("FAIL: %0d DRAM violations", dviol); end
    checks++;
    if (row_hits == 0 || activates == 0) begin failures++; $display("FAIL: no row hits"); end
    $display("row hits %0d activates %0d column commands %0d", row_hits, activates, col_cmds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
