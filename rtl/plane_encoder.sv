// plane_encoder: the write-path transform T followed by bit-plane disaggregation.
//
// Input is one 4 KB block of 2048 BF16 words in host (logical) order.  For a weight
// block the words are split straight into bit-planes: plane i holds bit i of every
// word, word j at plane bit j (P = X^T, the paper's eq. (2)).  For a KV block the host
// order is token-major, word e = t*C + c for token t (0..n-1) and channel c
// (0..C-1).  The encoder first regroups it channel-major, position p = c*n + t, so each
// channel's n tokens sit next to each other (step 1 of the paper's Fig. 8), then
// replaces each exponent by its difference to the channel's base exponent beta_c
// (step 2/3).  Following Fig. 8, which prints "beta delta delta delta" along an
// exponent row, the first token of each channel keeps its exponent and serves as
// beta_c; tokens 1..n-1 store delta = exp - beta_c modulo 256, which is lossless.  The
// choice of beta (first token), the modular delta, and sign/mantissa passing through
// unchanged are this design's choices: the paper says only that the controller
// selects a base exponent.  Planes are then cut from the transformed words.
//
// Output: planes[i][j] = bit i of stored word j; plane byte k is planes[i][8k+7:8k].
// Purely combinational (fixed wiring and 2048 8-bit subtractors).
module plane_encoder
  import trace_pkg::*;
(
  input  logic                                 kv,
  input  logic [BLOCK_ELEMS*ELEM_BITS-1:0]     words,
  output logic [NPLANES-1:0][PLANE_BITS-1:0]   planes
);

  logic [ELEM_BITS-1:0] stored [BLOCK_ELEMS];

  always_comb begin
    for (int c = 0; c < KV_CHANNELS; c++) begin
      for (int t = 0; t < KV_TOKENS; t++) begin
        // weight path: identity order
        // KV path: stored position c*n + t takes host word t*C + c
        logic [ELEM_BITS-1:0] w, b;
        int unsigned e, p;
        p = c * KV_TOKENS + t;
        e = 0; w = '0; b = '0;
        if (kv) begin
          e = t * KV_CHANNELS + c;
          w = words[e*ELEM_BITS +: ELEM_BITS];
          b = words[c*ELEM_BITS +: ELEM_BITS];        // token 0 of channel c
          if (t == 0) stored[p] = w;
          else stored[p] = {w[15], w[14:7] - b[14:7], w[6:0]};
        end else begin
          stored[p] = words[p*ELEM_BITS +: ELEM_BITS];
        end
      end
    end
    for (int i = 0; i < NPLANES; i++)
      for (int j = 0; j < PLANE_BITS; j++)
        planes[i][j] = stored[j][i];
  end

endmodule
