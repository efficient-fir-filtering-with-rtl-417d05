// fir_design_pkg: generates and quantises the 127-tap type I test filters.
//
// firwin_hamming() follows the usual window design method (as in SciPy's
// firwin with its defaults): ideal band responses built from sinc terms,
// a Hamming window w[n] = 0.54 - 0.46 cos(2 pi n / (N-1)), then scaling so
// the gain is 1 at the centre of the first pass band (0 for low pass and
// band stop, 1 (Nyquist) for high pass, the band centre for band pass).
// Cut-off frequencies are relative to Nyquist. quantise() multiplies by the
// largest power of two that keeps every coefficient inside a signed 16-bit
// word and rounds half to even (convergent rounding).
//
// Filter grid (index 0..9899, with D = 100 divisions of the band):
//   low pass f = i/D and high pass f = i/D, i = 1..D-1,
//   band pass and band stop [i/D, j/D], 1 <= i < j <= D-1.
package fir_design_pkg;
  import blmac_pkg::*;

  localparam int    NCOEF = N_TAPS / 2 + 1;
  localparam int    DIV   = 100;
  localparam real   PI    = 3.14159265358979323846;

  typedef enum int { LOWPASS, HIGHPASS, BANDPASS, BANDSTOP } ftype_t;

  function automatic real sinc(input real x);
    if (x == 0.0) return 1.0;
    return $sin(PI * x) / (PI * x);
  endfunction

  function automatic void grid(input int idx, output ftype_t t, output real f1, output real f2);
    int k = idx;
    f2 = 0.0;
    if (k < DIV - 1) begin t = LOWPASS; f1 = real'(k + 1) / DIV; return; end
    k -= DIV - 1;
    if (k < DIV - 1) begin t = HIGHPASS; f1 = real'(k + 1) / DIV; return; end
    k -= DIV - 1;
    t = BANDPASS;
    if (k >= (DIV - 1) * (DIV - 2) / 2) begin t = BANDSTOP; k -= (DIV - 1) * (DIV - 2) / 2; end
    for (int i = 1; i < DIV - 1; i++) begin
      if (k < DIV - 1 - i) begin
        f1 = real'(i) / DIV;
        f2 = real'(i + 1 + k) / DIV;
        return;
      end
      k -= DIV - 1 - i;
    end
  endfunction

  function automatic void firwin_hamming(input ftype_t t, input real f1, input real f2,
                                         output real h[N_TAPS]);
    real lo[2], hi[2], sf, s, alpha;
    int  nb;
    case (t)
      LOWPASS:  begin nb = 1; lo[0] = 0.0; hi[0] = f1; end
      HIGHPASS: begin nb = 1; lo[0] = f1;  hi[0] = 1.0; end
      BANDPASS: begin nb = 1; lo[0] = f1;  hi[0] = f2; end
      default:  begin nb = 2; lo[0] = 0.0; hi[0] = f1; lo[1] = f2; hi[1] = 1.0; end
    endcase
    alpha = 0.5 * (N_TAPS - 1);
    for (int n = 0; n < N_TAPS; n++) begin
      real m = n - alpha;
      h[n] = 0.0;
      for (int b = 0; b < nb; b++) h[n] += hi[b] * sinc(hi[b] * m) - lo[b] * sinc(lo[b] * m);
      h[n] *= 0.54 - 0.46 * $cos(2.0 * PI * n / (N_TAPS - 1));
    end
    if (lo[0] == 0.0)      sf = 0.0;
    else if (hi[0] == 1.0) sf = 1.0;
    else                   sf = 0.5 * (lo[0] + hi[0]);
    s = 0.0;
    for (int n = 0; n < N_TAPS; n++) s += h[n] * $cos(PI * (n - alpha) * sf);
    for (int n = 0; n < N_TAPS; n++) h[n] /= s;
  endfunction

  function automatic int round_even(input real v);
    real fl = $floor(v);
    real fr = v - fl;
    int  r  = int'(fl);
    if (fr > 0.5 || (fr == 0.5 && (r % 2 != 0))) r++;
    return r;
  endfunction

  // quantised first NCOEF coefficients (the rest mirror them)
  function automatic void quantise(input real h[N_TAPS], output int w[NCOEF]);
    int best = 0;
    for (int k = 0; k < 40; k++) begin
      bit fits = 1'b1;
      for (int j = 0; j < NCOEF; j++) begin
        int q = round_even(h[j] * (2.0 ** k));
        if (q > 32767 || q < -32768) fits = 1'b0;
      end
      if (fits) best = k; else break;
    end
    for (int j = 0; j < NCOEF; j++) w[j] = round_even(h[j] * (2.0 ** best));
  endfunction

endpackage
