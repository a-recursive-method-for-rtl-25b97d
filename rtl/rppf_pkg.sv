// rppf_pkg: shared sizes, types and helper functions of the recursive
// piecewise polynomial filter (RPPF).
//
// The filter realises an arbitrary FIR kernel h_t[n] as a chain of segments.
// Each segment convolves its input with one polynomial piece
//   h[n] = sum_k c'_k h^k_L[n],  h^k_L[n] = C(n+k-1, k) for 1 <= n <= L,
// built from K+1 cascaded accumulators with a delayed subtraction
// Lambda_k * v[n-L], Lambda_k = C(L+k-1, k) (Lambda_0 = 1).
//
// Sizes that follow the published implementation: 8 channels, 7 segments,
// order 4, segment length up to 500 samples, 14-bit samples, coefficients
// c'_k as 55-bit signed fixed point with 50 fractional bits. Accumulator,
// Lambda and output widths are derived here (this design's own choice):
// an accumulator must hold the largest truncated response
// max|v| * C(L_MAX+K, K+1), a Lambda the largest C(L_MAX+K-1, K).
package rppf_pkg;

  localparam int unsigned CHANNELS  = 8;
  localparam int unsigned SEGS      = 7;
  localparam int unsigned K         = 4;
  localparam int unsigned L_MAX     = 500;
  localparam int unsigned SAMPLE_W  = 14;
  localparam int unsigned COEF_W    = 55;
  localparam int unsigned COEF_FRAC = 50;
  localparam int unsigned OUT_W     = 32;
  localparam int unsigned TIME_W    = 32;

  // Binomial coefficient C(n, k) with 64-bit intermediate results.
  function automatic longint unsigned binom(input int unsigned n, input int unsigned k);
    longint unsigned r;
    r = 1;
    for (int unsigned i = 1; i <= k; i++) r = r * (64'(n) - 64'(k) + 64'(i)) / 64'(i);
    return r;
  endfunction

  // Number of bits needed to hold the unsigned value x.
  function automatic int unsigned bits_for(input longint unsigned x);
    int unsigned b;
    b = 0;
    while (x != 0) begin
      b++;
      x = x >> 1;
    end
    return (b == 0) ? 1 : b;
  endfunction

  // Signed accumulator width: sample magnitude 2^(sw-1) times C(lmax+k, k+1), plus sign.
  function automatic int unsigned acc_width(input int unsigned sw, input int unsigned lmax,
                                            input int unsigned k);
    return sw + bits_for(binom(lmax + k, k + 1));
  endfunction

  // Unsigned width of the largest Lambda_k = C(lmax+k-1, k).
  function automatic int unsigned lambda_width(input int unsigned lmax, input int unsigned k);
    return bits_for(binom(lmax + k - 1, k));
  endfunction

  // Width of a segment length field 1..lmax.
  function automatic int unsigned len_width(input int unsigned lmax);
    return bits_for(longint'(lmax));
  endfunction

  // Guard bits for summing nterms full-width products.
  function automatic int unsigned guard_bits(input int unsigned nterms);
    return bits_for(longint'(nterms));
  endfunction

  localparam int unsigned ACC_W    = acc_width(SAMPLE_W, L_MAX, K);    // 52
  localparam int unsigned LAMBDA_W = lambda_width(L_MAX, K);           // 32
  localparam int unsigned LEN_W    = len_width(L_MAX);                 // 9
  localparam int unsigned SUM_W    = ACC_W + COEF_W + guard_bits(SEGS * (K + 1));

  // Configuration of one segment: length, Lambda_1..Lambda_K, c'_0..c'_K.
  typedef struct packed {
    logic [LEN_W-1:0]                     len;
    logic [K:1][LAMBDA_W-1:0]             lambda;
    logic [K:0][COEF_W-1:0]               coef;    // each signed, COEF_FRAC fraction bits
  } seg_cfg_t;

  // Register index map of the configuration bus.
  localparam int unsigned IDX_LEN    = 0;
  localparam int unsigned IDX_LAMBDA = 1;          // 1..K
  localparam int unsigned IDX_COEF   = K + 1;      // K+1..2K+1
  localparam int unsigned IDX_THRESH = 15;

  // Trigger event reported to the readout.
  typedef struct packed {
    logic                     valid;
    logic signed [OUT_W-1:0]  energy;
    logic [TIME_W-1:0]        time_stamp;
  } trig_event_t;

endpackage
