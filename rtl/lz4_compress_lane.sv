// lz4_compress_lane: one compressor lane of the codec complex.
//
// Compresses one 256-byte bit-plane into the LZ4 block format (sequences of token,
// literal-length extension, literals, 2-byte little-endian offset, match-length
// extension; the last sequence carries literals only).  The paper reuses a commodity
// LZ4 engine and does not describe its insides, so this lane is the simplest encoder
// that still emits standard LZ4: its match finder only looks for repeats of the
// previous byte (offset 1), i.e. runs of equal bytes.  Runs are exactly what the
// bit-plane layout and the KV exponent delta create (long runs of 0x00 / 0xFF in the
// high-order planes), so this captures most of the gain on such planes; a hash-table
// match finder would also find longer-distance repeats.  The LZ4 end-of-block rules
// are kept: the last 5 bytes are literals and no match starts in the last 12 bytes.
//
// Operation: a start pulse latches the plane.  Phase 1 (about 251 cycles) scans one
// byte per cycle and records each run of >= 4 bytes as a (literal length, match
// length) sequence.  Phase 2 writes the output stream one byte per cycle.  If the
// stream would reach 256 bytes the lane stops and raises overflow: the plane is then
// stored raw (the codec bypass).  done pulses for one cycle; out_data, out_len and
// overflow hold until the next start.  Throughput is one byte per cycle per lane.
module lz4_compress_lane
  import trace_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [PLANE_BITS-1:0]    in_data,
  output logic                     busy,
  output logic                     done,
  output logic [PLANE_BITS-1:0]    out_data,
  output logic [PLEN_W-1:0]        out_len,
  output logic                     overflow
);

  localparam int unsigned N      = PLANE_BYTES;   // 256
  localparam int unsigned SCAN_END = N - 5;       // matches end before byte 251
  localparam int unsigned MSTART_MAX = N - 12;    // last match start
  localparam int unsigned MAXSEQ = 64;

  typedef enum logic [3:0] {S_IDLE, S_SCAN, S_TOK, S_LEXT, S_LIT, S_OFF0, S_OFF1,
                            S_MEXT, S_NEXT} state_e;
  state_e st;

  logic [7:0] src [N];
  logic [7:0] dst [N];
  logic [8:0] seq_lit [MAXSEQ];
  logic [8:0] seq_ml  [MAXSEQ];
  logic [5:0] nseq, si;
  logic [8:0] p, lit_start, rs, ip, lcnt;
  logic       inrun;
  logic [8:0] olen;

  // current sequence (si == nseq is the final, literal-only one)
  logic       last;
  logic [8:0] cur_lit, cur_ml4;
  always_comb begin
    last    = (si == nseq);
    cur_lit = last ? 9'(N) - lit_start : seq_lit[si];
    cur_ml4 = last ? 9'd0 : seq_ml[si] - 9'd4;
  end

  always_comb
    for (int k = 0; k < N; k++) out_data[k*8 +: 8] = dst[k];
  assign out_len = olen;
  assign busy    = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; done <= 1'b0; overflow <= 1'b0; olen <= '0;
      nseq <= '0; si <= '0; p <= '0; lit_start <= '0; rs <= '0; ip <= '0;
      lcnt <= '0; inrun <= 1'b0;
      for (int k = 0; k < N; k++) begin
        src[k] <= '0;
        dst[k] <= '0;
      end
      for (int k = 0; k < MAXSEQ; k++) begin
        seq_lit[k] <= '0;
        seq_ml[k]  <= '0;
      end
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          for (int k = 0; k < N; k++) src[k] <= in_data[k*8 +: 8];
          p <= 9'd1; lit_start <= '0; inrun <= 1'b0; nseq <= '0;
          olen <= '0; overflow <= 1'b0;
          st <= S_SCAN;
        end
        S_SCAN: begin
          if (p < 9'(SCAN_END) && src[p[7:0]] == src[8'(p - 9'd1)]) begin
            if (!inrun) begin
              inrun <= 1'b1;
              rs    <= p;
            end
          end else begin
            if (inrun && (p - rs) >= 9'd4 && rs <= 9'(MSTART_MAX)) begin
              seq_lit[nseq] <= rs - lit_start;
              seq_ml[nseq]  <= p - rs;
              nseq          <= nseq + 1;
              lit_start     <= p;
            end
            inrun <= 1'b0;
          end
          if (p == 9'(SCAN_END)) begin
            st <= S_TOK; si <= '0; ip <= '0;
          end
          p <= p + 1;
        end
        S_TOK: begin
          dst[olen[7:0]] <= {(cur_lit >= 15) ? 4'hF : cur_lit[3:0],
                             (cur_ml4 >= 15) ? 4'hF : cur_ml4[3:0]};
          lcnt <= cur_lit;
          st   <= (cur_lit >= 15) ? S_LEXT : S_LIT;
        end
        S_LEXT: begin
          dst[olen[7:0]] <= 8'(cur_lit - 9'd15);
          st <= S_LIT;
        end
        S_LIT: begin
          if (lcnt != 0) begin
            dst[olen[7:0]] <= src[ip[7:0]];
            ip   <= ip + 1;
            lcnt <= lcnt - 1;
          end else begin
            st <= last ? S_IDLE : S_OFF0;
            if (last) done <= 1'b1;
          end
        end
        S_OFF0: begin dst[olen[7:0]] <= 8'h01; st <= S_OFF1; end
        S_OFF1: begin
          dst[olen[7:0]] <= 8'h00;
          st <= (cur_ml4 >= 15) ? S_MEXT : S_NEXT;
        end
        S_MEXT: begin dst[olen[7:0]] <= 8'(cur_ml4 - 9'd15); st <= S_NEXT; end
        S_NEXT: begin
          ip <= ip + seq_ml[si];
          si <= si + 1;
          st <= S_TOK;
        end
        default: st <= S_IDLE;
      endcase
      // every state that writes a byte advances olen; stop at 256 bytes (store raw)
      if (st == S_TOK || st == S_LEXT || (st == S_LIT && lcnt != 0) || st == S_OFF0 ||
          st == S_OFF1 || st == S_MEXT) begin
        if (olen == 9'(N - 1)) begin
          overflow <= 1'b1;
          done     <= 1'b1;
          st       <= S_IDLE;
        end
        olen <= olen + 1;
      end
    end
  end

endmodule
