// staging_buffer: SRAM staging buffer of the write path with per-stream KV state.
//
// Host stores arrive one 64-byte cache line at a time, token by token for KV.  The
// buffer coalesces them into whole 4 KB blocks so the block can be transposed, split
// into bit-planes and compressed as a unit, decoupling host store timing from the
// internal packing (as the paper describes).  Each of the SLOTS slots is one writable
// stream: it holds a block id, a bitmap of the lines received so far and the stream's
// window index (number of complete KV tokens received, 4 lines per token of 128
// BF16 channels).  A store to a block that has no slot takes a free slot; when none is
// free, wr_ready drops: this is the backpressure the paper mentions for sustained
// write demand beyond the drain rate.  When all 64 lines of a slot are present the
// block is offered on the out_* port; the commit path accepts it (out_valid &&
// out_ready), and frees the slot with rel_valid once the block is in DRAM.
//
// Slot count and the rule that a block is written whole before it is committed are
// this design's choices (the paper sizes the buffer as n*C*b + overhead per stream
// times N_streams without giving N_streams).
//
// Timing: a store is written on the clock edge where wr_valid && wr_ready.  out_valid
// rises the cycle after the last line of a block is written.
module staging_buffer
  import trace_pkg::*;
#(
  parameter int unsigned SLOTS = 4
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // store port
  input  logic                             wr_valid,
  output logic                             wr_ready,
  input  logic [BLK_W-1:0]                 wr_blk,
  input  logic [5:0]                       wr_line,
  input  logic [LINE_BITS-1:0]             wr_data,
  input  logic                             wr_kv,
  input  logic                             wr_raw,
  // full block to the commit path
  output logic                             out_valid,
  input  logic                             out_ready,
  output logic [$clog2(SLOTS)-1:0]         out_slot,
  output logic [BLK_W-1:0]                 out_blk,
  output logic                             out_kv,
  output logic                             out_raw,
  output logic [BLOCK_ELEMS*ELEM_BITS-1:0] out_data,
  input  logic                             rel_valid,
  input  logic [$clog2(SLOTS)-1:0]         rel_slot,
  // query: is this block waiting in, or being committed from, a full slot
  input  logic [BLK_W-1:0]                 q_blk,
  output logic                             q_pending,
  // per-stream window index (complete tokens) of each slot
  output logic [4:0]                       window_idx [SLOTS],
  output logic [31:0]                      stalls
);

  localparam int unsigned SW = $clog2(SLOTS);

  logic [LINE_BITS-1:0]       mem [SLOTS][LINES_PER_BLOCK];
  logic [SLOTS-1:0]           used, full, busy;
  logic [BLK_W-1:0]           tag  [SLOTS];
  logic [LINES_PER_BLOCK-1:0] got  [SLOTS];
  logic [SLOTS-1:0]           kv_q, raw_q;

  // slot lookup for the incoming store
  logic          match_any, free_any;
  logic [SW-1:0] match_slot, free_slot, wslot;

  always_comb begin
    match_any = 1'b0; match_slot = '0;
    free_any  = 1'b0; free_slot  = '0;
    for (int s = SLOTS - 1; s >= 0; s--) begin
      if (used[s] && !full[s] && tag[s] == wr_blk) begin
        match_any = 1'b1; match_slot = SW'(s);
      end
      if (!used[s]) begin
        free_any = 1'b1; free_slot = SW'(s);
      end
    end
    wslot    = match_any ? match_slot : free_slot;
    wr_ready = match_any || free_any;
  end

  // offer the lowest full slot not yet taken by the commit path
  always_comb begin
    out_valid = 1'b0; out_slot = '0;
    for (int s = SLOTS - 1; s >= 0; s--)
      if (full[s] && !busy[s]) begin
        out_valid = 1'b1; out_slot = SW'(s);
      end
    out_blk = tag[out_slot];
    out_kv  = kv_q[out_slot];
    out_raw = raw_q[out_slot];
    for (int l = 0; l < LINES_PER_BLOCK; l++)
      out_data[l*LINE_BITS +: LINE_BITS] = mem[out_slot][l];
  end

  always_comb begin
    q_pending = 1'b0;
    for (int s = 0; s < SLOTS; s++)
      if (used[s] && (full[s] || &got[s]) && tag[s] == q_blk) q_pending = 1'b1;
  end

  always_comb
    for (int s = 0; s < SLOTS; s++)
      window_idx[s] = 5'($countones(got[s]) / 4);

  always_ff @(posedge clk)
    if (wr_valid && wr_ready) mem[wslot][wr_line] <= wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      used <= '0; full <= '0; busy <= '0; kv_q <= '0; raw_q <= '0;
      for (int s = 0; s < SLOTS; s++) begin
        tag[s] <= '0;
        got[s] <= '0;
      end
      stalls <= '0;
    end else begin
      if (wr_valid && !wr_ready) stalls <= stalls + 1;
      if (wr_valid && wr_ready) begin
        if (!match_any) begin
          used[wslot]  <= 1'b1;
          tag[wslot]   <= wr_blk;
          kv_q[wslot]  <= wr_kv;
          raw_q[wslot] <= wr_raw;
          got[wslot]   <= LINES_PER_BLOCK'(1) << wr_line;
        end else begin
          got[wslot][wr_line] <= 1'b1;
        end
      end
      for (int s = 0; s < SLOTS; s++)
        if (used[s] && !full[s] && &got[s]) full[s] <= 1'b1;
      if (out_valid && out_ready) busy[out_slot] <= 1'b1;
      if (rel_valid) begin
        used[rel_slot] <= 1'b0;
        full[rel_slot] <= 1'b0;
        busy[rel_slot] <= 1'b0;
        got[rel_slot]  <= '0;
      end
    end
  end

endmodule
