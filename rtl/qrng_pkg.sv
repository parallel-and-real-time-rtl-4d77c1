// qrng_pkg: constants shared by the tri-channel Toeplitz post-processor.
//
// The extractor of every channel multiplies an m x n binary Toeplitz matrix
// by n raw bits.  The matrix is processed as n/k sub-matrices of m x k, one
// per clock, where k is the ADC resolution.  The numbers below are the
// design point of the source publication: three channels, n = 768, k = 16,
// and m = 519, 548 and 581 for the three quantum sideband modes, all clocked
// at 240 MHz.  The host word width (64 bits) is this design's own choice.
package qrng_pkg;

  // Number of parallel channels (outer parallel layer).
  localparam int unsigned NCH = 3;

  // Raw bits per ADC sample, equal to the sub-matrix width k.
  localparam int unsigned K_DEF = 16;

  // Toeplitz matrix columns n (raw bits per hash block).
  localparam int unsigned N_DEF = 768;

  // Toeplitz matrix rows m (output bits per hash block), per channel.
  localparam int unsigned M_CH0 = 519;
  localparam int unsigned M_CH1 = 548;
  localparam int unsigned M_CH2 = 581;

  // Width of one word of the mixed output stream towards the host link.
  localparam int unsigned W_DEF = 64;

  // Channel number carried next to every mixed output word.
  typedef logic [1:0] ch_id_t;

  // Seed bits of an m x n Toeplitz matrix.
  function automatic int unsigned seed_len(int unsigned m, int unsigned n);
    return m + n - 1;
  endfunction

  // Number of k-bit words needed to write a seed of the given matrix.
  function automatic int unsigned seed_words(int unsigned m, int unsigned n, int unsigned k);
    return (m + n - 1 + k - 1) / k;
  endfunction

endpackage
