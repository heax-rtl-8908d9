// heax_pkg: word size and shared types of the HEAX homomorphic-encryption datapath.
//
// All residues are held in W-bit machine words. The moduli must satisfy
// p < 2^(W-2) so that the Shoup multiplier (mulred) is exact, and p = 1 mod 2n
// so that a 2n-th root of unity exists for the negacyclic NTT. The 54-bit word
// follows the paper (two 27-bit DSP columns); everything else here is a
// convenience of this implementation.
package heax_pkg;
  localparam int unsigned W = 54;          // native word (paper: 54-bit words)
  typedef logic [W-1:0] word_t;
  typedef logic [2*W-1:0] dword_t;

  // Modular addition and subtraction on reduced operands (a, b < p).
  function automatic word_t add_mod(word_t a, word_t b, word_t p);
    logic [W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return (s >= {1'b0, p}) ? word_t'(s - {1'b0, p}) : word_t'(s);
  endfunction

  function automatic word_t sub_mod(word_t a, word_t b, word_t p);
    return (a >= b) ? word_t'(a - b) : word_t'(a + p - b);
  endfunction
endpackage
