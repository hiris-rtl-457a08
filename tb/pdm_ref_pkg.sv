// pdm_ref_pkg: reference PDM bit pattern used by the testbenches.
//
// pdm_bit(node, ch, k) is a fixed pseudo-random bit for microphone ch of node
// node in microphone clock period k. The microphone model drives it and the
// checkers recompute it, so expected words never come from the design.
// ref_word(node, k) packs the 32 channels of one period with channel c at
// bit c.
package pdm_ref_pkg;

  function automatic logic pdm_bit(int unsigned node, int unsigned ch, int unsigned k);
    int unsigned x;
    x = node * 32'd7919 + ch * 32'd104729 + k * 32'd2654435761 + 32'd12345;
    x = x ^ (x >> 13);
    x = x * 32'h5bd1e995;
    x = x ^ (x >> 15);
    return x[7];
  endfunction

  function automatic logic [31:0] ref_word(int unsigned node, int unsigned k);
    logic [31:0] w;
    for (int c = 0; c < 32; c++) w[c] = pdm_bit(node, c, k);
    return w;
  endfunction

endpackage
