// htc_model_pkg: bit-exact reference model of the HTC arithmetic, used by the
// testbenches to predict the RTL's results independently of the RTL.
//
// The model walks through an epoch cycle by cycle in plain integer code:
//   * RB bit at count c: the bit x[N-1-k], where k = number of trailing ones
//     of c, found as popcount(c ^ (c+1)) - 1; the all-ones count gives 0;
//   * TB bit at count c: c < y;
//   * product: AND (unipolar) or XNOR (bipolar; operands offset by 2^(N-1));
//   * selector: low bits of a Fibonacci LFSR (seed 1) whose feedback is the
//     XOR of the bits named by the tap mask, stepped once per cycle;
//   * accumulator: ones of the selected products; result = ones*L, minus
//     L*2^(N-1) when bipolar.
package htc_model_pkg;

  function automatic int unsigned taps_of(int unsigned w);
    case (w)
      3: return 'h6;   4: return 'hC;   5: return 'h14;  6: return 'h30;
      7: return 'h60;  8: return 'hB8;  9: return 'h110; 10: return 'h240;
      default: return 'hB8;
    endcase
  endfunction

  function automatic int unsigned trailing_ones(int unsigned c);
    return $countones(c ^ (c + 1)) - 1;
  endfunction

  function automatic bit rb_bit(int unsigned x, int unsigned c, int unsigned n, bit bip);
    int unsigned xv, k;
    xv = bip ? (x ^ (1 << (n-1))) : x;
    k  = trailing_ones(c);
    if (k >= n) return 1'b0;
    return xv[n-1-k];
  endfunction

  function automatic bit tb_bit(int unsigned y, int unsigned c, int unsigned n, bit bip);
    int unsigned yv;
    yv = bip ? (y ^ (1 << (n-1))) : y;
    return c < yv;
  endfunction

  // Ones counted by an L-input MAC (L = 4) in one epoch.
  function automatic int unsigned mac_ones(int unsigned x[4], int unsigned y[4],
                                           int unsigned n, bit bip);
    int unsigned lfsr, ones, sel, mask;
    bit p;
    mask = (1 << n) - 1;
    lfsr = 1;
    ones = 0;
    for (int unsigned c = 0; c < (1 << n); c++) begin
      sel = lfsr & 3;
      p   = bip ? !(rb_bit(x[sel], c, n, 1) ^ tb_bit(y[sel], c, n, 1))
                :  (rb_bit(x[sel], c, n, 0) & tb_bit(y[sel], c, n, 0));
      ones += p;
      lfsr = ((lfsr << 1) | ($countones(lfsr & taps_of(n)) & 1)) & mask;
    end
    return ones;
  endfunction

  // MAC result as a signed integer: unipolar at scale 2^n, bipolar at 2^(n-1).
  function automatic int mac_result(int unsigned x[4], int unsigned y[4],
                                    int unsigned n, bit bip);
    int r;
    r = 4 * int'(mac_ones(x, y, n, bip));
    if (bip) r -= 4 * (1 << (n-1));
    return r;
  endfunction

  // Sign-extend an n-bit two's complement value.
  function automatic int sx(int unsigned v, int unsigned n);
    return (v >= (1 << (n-1))) ? int'(v) - (1 << n) : int'(v);
  endfunction

  // 8-point orthonormal DCT-II matrix entry C[k][n] = a_k cos(pi(2n+1)k/16),
  // a_0 = sqrt(1/8), a_k = 1/2, quantised to a signed 8-bit fraction of 128.
  function automatic int dct_coef(int k, int n);
    real a, v;
    a = (k == 0) ? $sqrt(1.0 / 8.0) : 0.5;
    v = a * $cos(3.14159265358979 * real'((2 * n + 1) * k) / 16.0) * 128.0;
    v = (v >= 0.0) ? v + 0.5 : v - 0.5;
    if (v > 127.0) v = 127.0;
    return int'($rtoi(v));
  endfunction

endpackage
