// lz4_decompress_lane: one decompressor lane of the codec complex (operator D).
//
// Decodes one compressed bit-plane in the standard LZ4 block format back into its
// 256 bytes.  Any offset (1..bytes produced so far) and any literal / match length
// with 255-byte extensions are accepted, so the lane decodes streams from any LZ4
// block encoder that respects the 256-byte plane size.  A plane stored raw (the
// codec bypass) is copied through in one cycle.
//
// Operation: start latches in_data (the compressed bytes, first byte at bits 7:0),
// in_len and raw.  The decoder then handles one byte per cycle: a token, literal-length
// extension bytes, literals, the two offset bytes, match-length extension bytes, and
// match copies out[op] = out[op - offset].  It stops when in_len bytes are consumed
// after a literal run.  done pulses for one cycle; out_data and err hold until the
// next start.  err is set for a malformed stream: an offset of 0 or beyond the output,
// output beyond 256 bytes, or a stream that ends short of 256 bytes.
// The paper gives LZ4 only by name; this byte-per-cycle decoder is this design's.
module lz4_decompress_lane
  import trace_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [PLANE_BITS-1:0] in_data,
  input  logic [PLEN_W-1:0]     in_len,
  input  logic                  raw,
  output logic                  busy,
  output logic                  done,
  output logic [PLANE_BITS-1:0] out_data,
  output logic                  err
);

  localparam int unsigned N = PLANE_BYTES;

  typedef enum logic [3:0] {S_IDLE, S_TOK, S_LEXT, S_LIT, S_OFF0, S_OFF1, S_MEXT,
                            S_COPY, S_END} state_e;
  state_e st;

  logic [7:0]  src [N];
  logic [7:0]  dst [N];
  logic [8:0]  ip, op, len;
  logic [9:0]  lcnt, mcnt;
  logic [15:0] off;

  always_comb
    for (int k = 0; k < N; k++) out_data[k*8 +: 8] = dst[k];
  assign busy = (st != S_IDLE);

  logic [7:0] b;
  assign b = src[ip[7:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; done <= 1'b0; err <= 1'b0;
      ip <= '0; op <= '0; len <= '0; lcnt <= '0; mcnt <= '0; off <= '0;
      for (int k = 0; k < N; k++) begin
        src[k] <= '0;
        dst[k] <= '0;
      end
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          for (int k = 0; k < N; k++) src[k] <= in_data[k*8 +: 8];
          err <= 1'b0; ip <= '0; op <= '0; len <= in_len;
          if (raw) begin
            for (int k = 0; k < N; k++) dst[k] <= in_data[k*8 +: 8];
            done <= 1'b1;
          end else begin
            st <= S_TOK;
          end
        end
        S_TOK: begin
          if (ip >= len) begin          // ran out of input before the last literals
            err <= 1'b1; st <= S_END;
          end else begin
            lcnt <= 10'(b[7:4]);
            mcnt <= 10'(b[3:0]);
            ip   <= ip + 1;
            st   <= (b[7:4] == 4'hF) ? S_LEXT : S_LIT;
          end
        end
        S_LEXT: begin
          lcnt <= lcnt + 10'(b);
          ip   <= ip + 1;
          if (b != 8'hFF) st <= S_LIT;
        end
        S_LIT: begin
          if (lcnt != 0) begin
            if (op >= 9'(N)) begin err <= 1'b1; st <= S_END; end
            else begin
              dst[op[7:0]] <= b;
              op   <= op + 1;
              ip   <= ip + 1;
              lcnt <= lcnt - 1;
            end
          end else if (ip >= len) begin
            st <= S_END;                // end of block
          end else begin
            st <= S_OFF0;
          end
        end
        S_OFF0: begin off[7:0]  <= b; ip <= ip + 1; st <= S_OFF1; end
        S_OFF1: begin
          off[15:8] <= b;
          ip <= ip + 1;
          if ({b, off[7:0]} == 16'd0 || {b, off[7:0]} > 16'(op)) begin
            err <= 1'b1; st <= S_END;
          end else begin
            st <= (mcnt == 10'd15) ? S_MEXT : S_COPY;
            if (mcnt != 10'd15) mcnt <= mcnt + 10'd4;
          end
        end
        S_MEXT: begin
          ip <= ip + 1;
          if (b != 8'hFF) begin
            mcnt <= mcnt + 10'(b) + 10'd4;
            st   <= S_COPY;
          end else begin
            mcnt <= mcnt + 10'(b);
          end
        end
        S_COPY: begin
          if (mcnt != 0) begin
            if (op >= 9'(N)) begin err <= 1'b1; st <= S_END; end
            else begin
              dst[op[7:0]] <= dst[8'(op - off[8:0])];
              op   <= op + 1;
              mcnt <= mcnt - 1;
            end
          end else begin
            st <= S_TOK;
          end
        end
        S_END: begin
          if (op != 9'(N)) err <= 1'b1;
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
