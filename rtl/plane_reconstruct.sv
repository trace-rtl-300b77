// plane_reconstruct: the read-path operators R (arithmetic reconstruction) and
// T^-1 (inverse topology) that rebuild one host cache line from decoded bit-planes.
//
// Inputs are the 16 decoded planes of a 4 KB block; planes outside fetch_mask were
// never read and are forced to zero here ("zero-pads any missing LSB planes").
// 1. Words are reassembled from the planes (inverse of the bit-plane transpose).
// 2. For a KV block the channel-major order is undone (host word t*C + c comes from
//    stored position c*n + t) and the exponent delta is added back to the channel's
//    base exponent, which the encoder left in token 0 of each channel.
// 3. The view's element code is formed: sign, top r_e exponent bits, top r_m mantissa
//    bits.  If guard planes were fetched (d_m below a kept mantissa cut, or d_e below
//    an exponent-only cut) the code is rounded to nearest, ties to even, on the
//    concatenated exponent/mantissa magnitude; a carry out of the mantissa moves into
//    the exponent; a code already at its largest magnitude is left as is (saturates).
//    The paper names round-to-nearest with guard planes; tie rule and saturation are
//    this design's choices.
// 4. Codes of 2^ret_lg bits are packed, element k of the line at bits [k*N +: N]; line
//    `line` of the view covers elements line*(512/N) .. line*(512/N) + 512/N - 1.  This
//    packing follows Fig. 9, where view i spans L*N_i bits.  The view must satisfy
//    1 + r_e + r_m = 2^ret_lg with ret_lg in 2..4, r_e + d_e <= 8 and r_m + d_m <= 7.
//
// Purely combinational; the controller registers the result.
module plane_reconstruct
  import trace_pkg::*;
(
  input  logic [NPLANES-1:0][PLANE_BITS-1:0] planes,
  input  plane_mask_t                        fetch_mask,
  input  logic                               kv,
  input  logic [3:0]                         r_e,
  input  logic [2:0]                         r_m,
  input  logic [3:0]                         d_e,
  input  logic [2:0]                         d_m,
  input  logic [2:0]                         ret_lg,
  input  logic [5:0]                         line,
  output logic [LINE_BITS-1:0]               data
);

  logic [ELEM_BITS-1:0] stored [BLOCK_ELEMS];
  logic [ELEM_BITS-1:0] word   [BLOCK_ELEMS];
  logic [ELEM_BITS-1:0] code   [BLOCK_ELEMS];

  // one element: keep, guard and round
  function automatic logic [15:0] make_code(input logic [15:0] w, input logic [3:0] re,
                                            input logic [2:0] rm, input logic [3:0] de,
                                            input logic [2:0] dm);
    logic [7:0]  ex;
    logic [6:0]  mn;
    logic [15:0] k, kmax, g;
    int unsigned kb, gb;
    logic        rb, st, up;
    ex = w[14:7];
    mn = w[6:0];
    kb = int'(re) + int'(rm);
    k  = (16'(ex >> (8 - int'(re))) << rm) | 16'(mn >> (7 - int'(rm)));
    if (rm != 0 || re == 4'd8) begin
      gb = int'(dm);
      g  = 16'(mn >> (7 - int'(rm) - gb)) & ((16'(1) << gb) - 16'(1));
    end else begin
      gb = int'(de);
      g  = 16'(ex >> (8 - int'(re) - gb)) & ((16'(1) << gb) - 16'(1));
    end
    rb = (gb > 0) ? g[gb-1] : 1'b0;
    st = (gb > 1) ? ((g & ((16'(1) << (gb - 1)) - 16'(1))) != 0) : 1'b0;
    up = rb && (st || k[0]);
    kmax = (16'(1) << kb) - 16'(1);
    if (up && k != kmax) k = k + 16'(1);
    return (16'(w[15]) << kb) | k;
  endfunction

  always_comb begin
    for (int j = 0; j < BLOCK_ELEMS; j++)
      for (int i = 0; i < NPLANES; i++)
        stored[j][i] = planes[i][j] & fetch_mask[i];
    for (int c = 0; c < KV_CHANNELS; c++)
      for (int t = 0; t < KV_TOKENS; t++) begin
        logic [15:0] s, b;
        if (kv) begin
          s = stored[c*KV_TOKENS + t];
          b = stored[c*KV_TOKENS];
          if (t == 0) word[t*KV_CHANNELS + c] = s;
          else word[t*KV_CHANNELS + c] = {s[15], s[14:7] + b[14:7], s[6:0]};
        end else begin
          word[c*KV_TOKENS + t] = stored[c*KV_TOKENS + t];
        end
      end
    for (int j = 0; j < BLOCK_ELEMS; j++)
      code[j] = make_code(word[j], r_e, r_m, d_e, d_m);
    data = '0;
    case (ret_lg)
      3'd2:    for (int k = 0; k < 128; k++) data[k*4 +: 4]   = code[int'(line)*128 + k][3:0];
      3'd3:    for (int k = 0; k < 64;  k++) data[k*8 +: 8]   = code[int'(line)*64 + k][7:0];
      default: for (int k = 0; k < 32;  k++) data[k*16 +: 16] = code[int'(line)*32 + k];
    endcase
  end

endmodule
