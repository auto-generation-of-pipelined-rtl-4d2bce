// polar_pkg: types and elaboration-time helpers shared by the pipelined polar
// encoder columns.
//
// frame_ctrl_t is the two-bit side channel that travels with every lane vector
// through the pipeline: `valid` marks a cycle that carries a vector of some
// codeword and `sof` marks the first vector of a codeword. The switch columns
// delay it by exactly as many cycles as they delay the data, so at any column
// boundary `sof` tells the next switch where a codeword begins.
//
// The helper functions evaluate the general formula F(N,M) of the
// architecture: the subscript of the i-th variable column W and the latency
// and storage figures of the generated encoder. They are only used at
// elaboration time.
package polar_pkg;

  typedef struct packed {
    logic valid;  // this cycle carries a vector of a codeword
    logic sof;    // this vector is the first one of its codeword
  } frame_ctrl_t;

  // True when v is a power of two (v >= 1).
  function automatic bit is_pow2(int unsigned v);
    return (v != 0) && ((v & (v - 1)) == 0);
  endfunction

  // Numerator/denominator form of the subscript of the i-th W column,
  // N / (2^i * M). When it is >= 2 the column is the switch column
  // I_{M/2} (x) S_K with K = N / (2^i M); otherwise it is the permutation
  // column I_k (x) P_{M/k} with k = 2^i M / N.
  function automatic bit w_is_switch(int unsigned n_len, int unsigned m_par, int unsigned i);
    return (n_len >> i) >= (2 * m_par);
  endfunction

  function automatic int unsigned w_switch_k(int unsigned n_len, int unsigned m_par, int unsigned i);
    return (n_len >> i) / m_par;
  endfunction

  function automatic int unsigned w_perm_copies(int unsigned n_len, int unsigned m_par, int unsigned i);
    return (m_par << i) / n_len;
  endfunction

  // Cycles from the first input vector of a codeword to its first output vector.
  function automatic int unsigned encoder_latency(int unsigned n_len, int unsigned m_par);
    return (3 * n_len) / (2 * m_par) - 1;
  endfunction

  // Number of one-bit delay elements in the generated encoder.
  function automatic int unsigned encoder_mem(int unsigned n_len, int unsigned m_par);
    return (3 * n_len) / 2 - m_par;
  endfunction

endpackage
