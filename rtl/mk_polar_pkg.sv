// mk_polar_pkg: shared constants and elaboration-time helpers of the
// combinational multi-kernel successive-cancellation (SC) polar decoder.
//
// A code is described by its kernel sequence read from the root of the SC
// tree: M stages, stage s (0 = root) uses the binary kernel T2 or the ternary
// kernel T3. The sequence is held in a bit mask TERN whose bit s is 1 when
// stage s is ternary, so {3,2,2,2,2} (N = 48) is M = 5, TERN = 5'b00001.
// The block length is N = 2^n * 3^m, the product of the kernel sizes.
//
// LLRs are Q-bit sign-magnitude words: bit Q-1 is the sign (1 = negative),
// bits Q-2..0 the magnitude. Q = 5 is the quantisation the design is built
// for; kernel order, Q and the mask are parameters of every module.
//
// Q = 5 and the default kernel order {3,2,2,2,2} are the published main
// configuration. The mask encoding, the MaxStages = 16 limit and the code
// length function are this design's own. The package holds no logic and has no
// timing.
package mk_polar_pkg;

  // Default LLR width (sign + 4 magnitude bits).
  localparam int unsigned QDefault = 5;

  // Longest kernel sequence a TERN mask can describe.
  localparam int unsigned MaxStages = 16;

  typedef logic [MaxStages-1:0] tern_mask_t;

  // Default code: N = 48, kernel order {3,2,2,2,2}.
  localparam int unsigned MDefault    = 5;
  localparam tern_mask_t  TernDefault = tern_mask_t'(5'b00001);

  // Block length of an M-stage sequence.
  function automatic int unsigned code_len(int unsigned m, tern_mask_t tern);
    int unsigned n = 1;
    for (int unsigned s = 0; s < m; s++) n = n * (tern[s] ? 3 : 2);
    return n;
  endfunction

endpackage
