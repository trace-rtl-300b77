// plane_mask_gen: turns a precision view into the bit-planes a read must fetch.
//
// A view keeps the sign plane, the r_e most significant exponent planes and the r_m
// most significant mantissa planes of the BF16 container.  When the view asks for
// on-device rounding it also names d_e / d_m guard planes directly below the kept
// ones.  The selection is a fixed function of the format and never looks at data,
// as the paper specifies (S_req = sign U top r_E exponent planes U top r_M mantissa
// planes, plus guard planes for a high-fidelity view).
//
// Outputs:
//   ret_mask   - planes that end up in the value returned to the host
//   fetch_mask - ret_mask plus the guard planes (what the scheduler reads)
// KV blocks keep the exponent as a delta against a per-channel base, so a reduced
// view of a KV block cannot use a subset of exponent planes: with kv=1 all eight
// exponent planes are fetched (the mantissa stays elastic).  This is this design's
// choice; the paper evaluates plane-aligned fetch on weights only.
//
// Purely combinational; the request front end registers the result.
module plane_mask_gen
  import trace_pkg::*;
(
  input  logic [3:0]  r_e,
  input  logic [2:0]  r_m,
  input  logic [3:0]  d_e,
  input  logic [2:0]  d_m,
  input  logic        kv,
  output plane_mask_t ret_mask,
  output plane_mask_t fetch_mask
);

  // ones in the top k bits of an n-bit field
  function automatic logic [7:0] top_ones(input int unsigned k, input int unsigned n);
    logic [7:0] r;
    r = '0;
    for (int unsigned i = 0; i < 8; i++)
      if (i < n && i >= n - ((k > n) ? n : k)) r[i] = 1'b1;
    return r;
  endfunction

  logic [7:0] exp_keep, exp_fetch;
  logic [6:0] man_keep, man_fetch;

  always_comb begin
    exp_keep  = top_ones(int'(r_e), EXP_BITS);
    exp_fetch = kv ? 8'hFF : top_ones(int'(r_e) + int'(d_e), EXP_BITS);
    man_keep  = 7'(top_ones(int'(r_m), MAN_BITS));
    man_fetch = 7'(top_ones(int'(r_m) + int'(d_m), MAN_BITS));
    ret_mask   = {1'b1, exp_keep, man_keep};
    fetch_mask = {1'b1, exp_fetch, man_fetch};
  end

endmodule
