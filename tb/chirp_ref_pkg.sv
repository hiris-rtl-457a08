// chirp_ref_pkg: real-valued reference for the predefined hyperbolic chirp.
//
// chirp_codes fills codes[0 .. len-1] with the ideal DAC codes of the chirp:
// the period of sample n is P(n) = (P0_Q + n*DP) / 2^fr samples, with
// P0_Q = fs*2^fr/f_start and DP = (fs*2^fr/f_stop - P0_Q)/(len-1) in integer
// arithmetic (the chirp's definition), the phase in cycles starts at 0 and
// grows by 1/P(n) per sample, and the code is mid + amp*sin(2*pi*phase).
// The phase and sine are computed in double precision, independently of the
// generator's divider and sine approximation.
package chirp_ref_pkg;

  function automatic void chirp_codes(int unsigned fs, int unsigned f_start,
                                      int unsigned f_stop, int unsigned len,
                                      int unsigned amp, int unsigned fr,
                                      int unsigned dac_w, ref real codes[$]);
    longint p0_q, p1_q, dp;
    real ph;
    codes.delete();
    p0_q = (longint'(fs) << fr) / longint'(f_start);
    p1_q = (longint'(fs) << fr) / longint'(f_stop);
    dp   = (p1_q - p0_q) / (longint'(len) - 1);
    ph   = 0.0;
    for (int unsigned n = 0; n < len; n++) begin
      real p;
      codes.push_back(real'(1 << (dac_w - 1)) + real'(amp) * $sin(2.0 * 3.141592653589793 * ph));
      p  = real'(p0_q + longint'(n) * dp) / real'(longint'(1) << fr);
      ph = ph + 1.0 / p;
      ph = ph - $floor(ph);
    end
  endfunction

endpackage
