// p2m_pkg -- shared types and size arithmetic of the in-sensor front-end.
//
// The front-end computes the first layer of a detection CNN (strided KxK
// convolution, batch-norm, ReLU and 2x2 pooling) inside a CMOS image sensor.
// This package holds what several modules need to agree on:
//   * the pooling mode (average, max, or none) selected at run time;
//   * the output size of a strided, padded convolution;
//   * the kernel-parallel schedule of the column ADCs: with P = ceil(K/S)
//     horizontal (and vertical) phases, one conversion cycle activates, in
//     every strip of P*S pixel columns, K vertically stacked kernels that do
//     not overlap, each read by one of the strip's column ADCs.  A "band" is
//     P*K consecutive output rows; it takes P*P conversion cycles.
// The map from an output position inside a band to (ADC column, register
// slot) is defined here once and used by the pixel-array model, the register
// bank reader and the testbenches.  The phase/strip/band arithmetic follows
// the parallelism of the paper's Fig. 2 and Eq. (2); the band grouping and
// the slot numbering are this design's choice.
package p2m_pkg;

  typedef enum logic [1:0] {
    POOL_AVG  = 2'd0,
    POOL_MAX  = 2'd1,
    POOL_NONE = 2'd2
  } pool_mode_t;

  typedef enum logic {
    PH_NEG = 1'b0,   // ramp against the negative-weight sum, counter counts down
    PH_POS = 1'b1    // ramp against the positive-weight sum, counter counts up
  } adc_phase_t;

  function automatic int cdiv(input int a, input int b);
    return (a + b - 1) / b;
  endfunction

  // Output size of a KxK convolution with stride S and padding D.
  function automatic int conv_out(input int n, input int k, input int s, input int d);
    return (n + 2 * d - k) / s + 1;
  endfunction

  // Number of phases: kernels S*P apart never overlap.
  function automatic int phases(input int k, input int s);
    return cdiv(k, s);
  endfunction

  // Weight transistors needed per pixel (paper, Eq. 1): a pixel takes part
  // in at most ceil(K/S)^2 kernel positions of each of the CO channels.
  // 64 for K=7, S=4, CO=16 and 256 for S=2 (paper, Table I).
  function automatic int weight_transistors(input int k, input int s, input int co);
    return phases(k, s) * phases(k, s) * co;
  endfunction

  // ADC column that converts output column x (phase p = x % P) when it is
  // the k-th kernel of its vertical stack.
  function automatic int adc_col(input int x, input int k, input int pp, input int s);
    return (x / pp) * pp * s + k;
  endfunction

  // Register slot written by the conversion cycle of vertical residue q and
  // horizontal phase p.
  function automatic int slot_of(input int q, input int p, input int pp);
    return q * pp + p;
  endfunction

endpackage
