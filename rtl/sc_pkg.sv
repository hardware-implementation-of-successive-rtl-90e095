// sc_pkg: types and elaboration-time helpers shared by the line successive-
// cancellation (SC) polar decoder.
//
// LLRs travel as Q-bit sign-magnitude words: bit Q-1 is the sign (1 = negative)
// and bits Q-2..0 the unsigned magnitude. Sign-magnitude follows the paper's
// choice for the processing elements; the MSB position of the sign is this
// design's own convention.
package sc_pkg;

  // Function a processing element performs in a given cycle. The encoding
  // (f = 0, g = 1) mirrors the selector rule: bit l of the bit index i is 0 for
  // f and 1 for g.
  typedef enum logic {
    PE_F = 1'b0,
    PE_G = 1'b1
  } pe_fn_e;

  // Reverse the low `width` bits of x (used for the partial-sum update masks).
  function automatic int unsigned bitrev(input int unsigned x, input int unsigned width);
    int unsigned r;
    r = 0;
    for (int unsigned k = 0; k < width; k++) begin
      r = (r << 1) | ((x >> k) & 1);
    end
    return r;
  endfunction

  // First LLR-memory cell of stage l's region (stage l owns 2^l cells):
  // 2n - 2^(l+1). The channel LLRs occupy cells 0..n-1 ("stage m").
  function automatic int unsigned llr_out_base(input int unsigned n, input int unsigned l);
    return 2 * n - (2 << l);
  endfunction

  // First cell read by the PE line when stage l is active: 2n - 2^(l+2).
  function automatic int unsigned llr_in_base(input int unsigned n, input int unsigned l);
    return 2 * n - (4 << l);
  endfunction

  // First partial-sum cell of stage l's region: n - 2^(l+1).
  function automatic int unsigned ps_base(input int unsigned n, input int unsigned l);
    return n - (2 << l);
  endfunction

endpackage
