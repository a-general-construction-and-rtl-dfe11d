// polar_pkg: constants and helper functions shared by the folded polar encoder.
//
// The encoder computes x = u * F^{(x)n} over GF(2), F = [1 0; 1 1], for a code of
// length N = 2^n, taking L source bits per clock cycle. The helpers below give the
// number of frame cycles, the number of all-zero input blocks that the pruned encoder
// skips, and the bit-reversal used to name the lane order of the datapath.
package polar_pkg;

  // Bit-reverse the low 'bits' bits of v.
  function automatic int unsigned bitrev(input int unsigned v, input int unsigned bits);
    int unsigned r;
    r = 0;
    for (int unsigned i = 0; i < bits; i++) r = (r << 1) | ((v >> i) & 1);
    return r;
  endfunction

  // Number of input blocks of a frame that are known to be all zero:
  // floor(C/L) with C the number of leading frozen bits.
  function automatic int unsigned zero_blocks(input int unsigned N, input int unsigned L,
                                              input int unsigned C);
    int unsigned z;
    z = C / L;
    if (z > N / L - 1) z = N / L - 1;  // at least one block is always fed
    return z;
  endfunction

  // Code-bit index carried by output lane p in output block k (k = 0 .. N/L-1).
  // Lane pair p/2 is one commutator chain; its upper lane carries the first half
  // of the code word and its lower lane the second half.
  function automatic int unsigned out_index(input int unsigned N, input int unsigned L,
                                            input int unsigned k, input int unsigned p);
    return (p % 2) * (N / 2) + k * (L / 2) + bitrev(p / 2, $clog2(L) - 1);
  endfunction

endpackage
