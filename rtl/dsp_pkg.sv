// dsp_pkg: types and constant generators shared by the readout datapath.
//
// Every datapath sample is a complex number with 16-bit signed I and Q
// parts (the stimulus memory stores "two times 16 bits" per sample, and the
// whole chain keeps that format). The package also holds integer-only
// constant functions that build the sine tables of the NCOs and the
// windowed-sinc coefficients of the polyphase filter bank and of the DDC
// decimation filter. They are evaluated at elaboration time, so no table
// file is needed; the formulas are:
//   sin_q30(p, n)   = round(2^30 * sin(2*pi*p/n)), by quadrant folding and a
//                     Taylor series to the x^13 term in Q30 arithmetic
//   lowpass(i)      = sinc((2i-L+1)/(2M)) * sin^2(pi*(i+0.5)/L), i = 0..L-1,
//                     i.e. a Hann-windowed sinc with cut-off fs/(2M), scaled
//                     so that the L coefficients sum to 2^frac (unity DC gain)
// The paper gives neither table sizes nor coefficients; these are this
// design's choices.
package dsp_pkg;

  localparam int SAMPLE_W = 16;

  typedef struct packed {
    logic signed [SAMPLE_W-1:0] i;
    logic signed [SAMPLE_W-1:0] q;
  } cplx_t;

  // Saturate a wide signed value to 16 bits.
  function automatic logic signed [15:0] sat16(input longint v);
    if (v > 32767) return 16'sd32767;
    if (v < -32768) return -16'sd32768;
    return 16'(v);
  endfunction

  // round(2^30 * sin(2*pi*p/n)) for any n > 0.
  function automatic longint sin_q30(input int p, input int n);
    longint r, q, rem, x, x2, term, sum;
    r = longint'(p) % longint'(n);
    if (r < 0) r = r + n;
    q   = (4 * r) / n;           // quadrant 0..3
    rem = 4 * r - q * n;         // position within quadrant, 0..n-1
    if (q == 1 || q == 3) rem = n - rem;
    x  = (64'sd1686629713 * rem) / n;   // (pi/2 in Q30) * rem / n
    x2 = (x * x) >>> 30;
    term = x;
    sum  = x;
    for (int k = 1; k <= 6; k++) begin
      term = -((term * x2) >>> 30) / ((2 * k) * (2 * k + 1));
      sum  = sum + term;
    end
    if (q >= 2) sum = -sum;
    return sum;
  endfunction

  // Q15 sine / cosine of 2*pi*p/n.
  function automatic logic signed [15:0] sin_q15(input int p, input int n);
    return sat16((sin_q30(p, n) + (64'sd1 <<< 14)) >>> 15);
  endfunction

  function automatic logic signed [15:0] cos_q15(input int p, input int n);
    return sin_q15(4 * p + n, 4 * n);
  endfunction

  // Windowed-sinc low-pass of length L (even) and cut-off fs/(2M), packed
  // into 18-bit fields, coefficient i at bits [i*18 +: 18].
  localparam int MAX_TAPS = 1024;
  function automatic logic [MAX_TAPS*18-1:0] lowpass_coefs(input int L, input int M,
                                                          input int frac);
    longint raw [MAX_TAPS];
    longint total, d, s, w, c;
    logic [MAX_TAPS*18-1:0] packed_c;
    total = 0;
    packed_c = '0;
    for (int i = 0; i < L; i++) begin
      d = longint'(2 * i - (L - 1));                                 // odd, never 0
      s = (sin_q30(int'(d), 4 * M) * (2 * M) * 113) / (355 * d); // sinc in Q30
      w = sin_q30(2 * i + 1, 4 * L);
      w = (w * w) >>> 30;                                   // Hann window
      raw[i] = (s * w) >>> 30;
      total = total + raw[i];
    end
    for (int i = 0; i < L; i++) begin
      c = ((raw[i] <<< frac) + total / 2) / total;
      packed_c[i*18 +: 18] = c[17:0];
    end
    return packed_c;
  endfunction

endpackage
