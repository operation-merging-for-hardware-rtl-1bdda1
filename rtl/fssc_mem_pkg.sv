// fssc_mem_pkg: word counts and word addresses of the decoder memories.
//
// A memory word holds 2*PE elements as two banks of PE. A node at a high stage
// S (S > log2 PE) occupies 2^(S-1)/PE words; word k holds node elements
// [k*PE, k*PE+PE) in bank 0 and [2^(S-1)+k*PE, ...) in bank 1, so an F or G
// step finds both operands of each lane in one word. Stages log2(N)-1 down to
// log2(PE)+1 are stored from address 0 upwards; every stage at or below
// log2(PE) shares the single last word ("packed" word), each in its own field.
// The root stage log2(N) lives in the channel memory (alpha) or in the
// codeword memory (beta).
package fssc_mem_pkg;

  function automatic int words_of(input int pe, input int s);
    return (1 << (s - 1)) / pe;
  endfunction

  function automatic int base_of(input int pe, input int logn, input int s);
    int b;
    b = 0;
    for (int t = logn - 1; t > s; t--) b += words_of(pe, t);
    return b;
  endfunction

  // words of the alpha (or one beta) memory, packed word included
  function automatic int depth_of(input int pe, input int logn);
    return base_of(pe, logn, $clog2(pe));
  endfunction

endpackage
