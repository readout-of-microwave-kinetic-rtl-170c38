// pfb_pkg: constants and helper functions shared by the critically sampled
// polyphase filter bank (PFB) and its embedded test system.
//
// The sizes that come from the design itself are the 1024-point FFT, the
// 1024 polyphase branches (critically sampled: decimation M equals N) and the
// four taps per branch, giving 4096 prototype-filter coefficients. All word
// lengths are this implementation's own choice: a 16-bit real input, 16-bit
// Q1.15 coefficients, an 18-bit filter output and a 32-bit FFT datapath, so a
// complex bin fits a 64-bit word. The prototype window (Hamming-weighted sinc)
// is also a choice made here; the functions below compute every table at
// elaboration time so no data files are needed.
package pfb_pkg;

  localparam int unsigned N_FFT   = 1024;  // FFT length = number of channels
  localparam int unsigned TAPS    = 4;     // taps per polyphase branch
  localparam int unsigned X_W     = 16;    // input sample width
  localparam int unsigned COEF_W  = 16;    // coefficient width (Q1.15)
  localparam int unsigned Y_W     = 18;    // subfilter output width
  localparam int unsigned FFT_DW  = 32;    // FFT datapath width (each of re, im)
  localparam int unsigned TW_W    = 18;    // twiddle width, 1.0 = 2**(TW_W-2)

  localparam real PI = 3.14159265358979323846;

  // Prototype low-pass filter tap i of a filter with ntaps*nfft taps:
  // a sinc whose first zeros are one channel spacing away, weighted by a
  // Hamming window, peak value 1.0.
  //   h[i] = w[i] * sinc((i - (L-1)/2) / nfft),  L = ntaps*nfft
  //   w[i] = 0.54 - 0.46 cos(2 pi i / (L-1))
  function automatic real proto_coef(int unsigned i, int unsigned nfft, int unsigned ntaps);
    real len, xr, s, w;
    len = real'(nfft * ntaps);
    xr  = (real'(i) - (len - 1.0) / 2.0) / real'(nfft);
    if (xr == 0.0) s = 1.0;
    else           s = $sin(PI * xr) / (PI * xr);
    w = 0.54 - 0.46 * $cos(2.0 * PI * real'(i) / (len - 1.0));
    return s * w;
  endfunction

  // Round a real to the nearest integer and clip it to a signed width.
  function automatic longint round_clip(real v, int unsigned width);
    longint r, hi, lo;
    r  = longint'($floor(v + 0.5));
    hi = (longint'(1) <<< (width - 1)) - 1;
    lo = -(longint'(1) <<< (width - 1));
    if (r > hi) r = hi;
    if (r < lo) r = lo;
    return r;
  endfunction

  // Bit reversal of the low `bits` bits of v.
  function automatic int unsigned bitrev(int unsigned v, int unsigned bits);
    int unsigned r;
    r = 0;
    for (int unsigned b = 0; b < bits; b++)
      if (v[b]) r |= (1 << (bits - 1 - b));
    return r;
  endfunction

endpackage
