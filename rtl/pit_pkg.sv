// pit_pkg: shared widths, types and helper functions of the progressive
// image transmission link (Haar wavelet transform plus Hamming channel code).
//
// Pixels are PIX_BITS-bit unsigned grey levels. Every wavelet coefficient fits in
// COEF_BITS = PIX_BITS + 1 bits two's complement: averages stay inside the range of
// the samples they come from, and a difference a - floor((a+b)/2) of two
// samples that span at most 2^PIX_BITS - 1 lies in [-(2^(PIX_BITS-1)-1), 2^(PIX_BITS-1)].
// The 3-level count follows the paper; the widths and the subblock size are
// this design's own choices.
package pit_pkg;

  parameter int PIX_BITS  = 8;          // grey-level bits per pixel
  parameter int COEF_BITS = PIX_BITS + 1;  // signed wavelet coefficient bits
  parameter int BLK_N     = 8;          // subblock edge, N x N samples
  parameter int NUM_LEVELS = 3;        // Haar decomposition levels

  typedef logic        [PIX_BITS-1:0]  pix_t;
  typedef logic signed [COEF_BITS-1:0] coef_t;

  // Smallest r with 2^r >= k + r + 1 (number of Hamming parity bits).
  function automatic int hamming_r(input int k);
    int r;
    r = 1;
    while ((1 << r) < k + r + 1) r++;
    return r;
  endfunction

  // Codeword length n = k + r.
  function automatic int hamming_n(input int k);
    return k + hamming_r(k);
  endfunction

  // 1 when codeword position pos (numbered from 1) is a power of two,
  // i.e. a parity position.
  function automatic bit is_pow2(input int pos);
    return (pos > 0) && ((pos & (pos - 1)) == 0);
  endfunction

  // Codeword position (1-based) of data bit i: the (i+1)-th position that is
  // not a power of two.
  function automatic int data_pos(input int i);
    int cnt;
    cnt = 0;
    for (int pos = 3; pos < 256; pos++) begin
      if (!is_pow2(pos)) begin
        if (cnt == i) return pos;
        cnt++;
      end
    end
    return 0;
  endfunction

endpackage
