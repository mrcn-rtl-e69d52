// tb_sig_model -- reference Bloom-filter hash used by the testbenches.
//
// Restates the signature hash from its definition (rotate the 26-bit line
// address left by 7*k bits, then XOR the IDX_W-bit chunks together) with
// shifts and slices rather than the bit loop of the design's package, so
// the tests do not reuse the design's own code.
package tb_sig_model;
  localparam int LINE_W = 26;

  function automatic int unsigned ref_hash(input logic [LINE_W-1:0] line, input int k, input int idx_w);
    logic [LINE_W-1:0] r;
    logic [63:0]       wide;
    int unsigned       h;
    int                s;
    s    = (7 * k) % LINE_W;
    r    = (s == 0) ? line : ((line << s) | (line >> (LINE_W - s)));
    wide = 64'(r);
    h    = 0;
    for (int c = 0; c * idx_w < LINE_W; c++)
      h = h ^ int'((wide >> (c * idx_w)) & ((64'd1 << idx_w) - 1));
    return h;
  endfunction
endpackage
