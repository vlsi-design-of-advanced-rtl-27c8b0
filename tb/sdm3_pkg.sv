// sdm3_pkg -- behavioural third-order sigma-delta modulator for testbenches.
//
// Stimulus source only, not part of the filter. It models the kind of
// converter that feeds the CIC decimator: a third-order modulator with a
// 5-bit quantizer (codes -16..15). It uses the error-feedback form, whose
// noise transfer function is (1 - z^-1)^3:
//   v[n] = u[n] - 3 e[n-1] + 3 e[n-2] - e[n-3],  y[n] = Q(v[n]),  e = y - v,
// so y = u + (1 - z^-1)^3 e: the input plus third-order high-pass shaped
// quantization noise. u is a sine of amplitude amp (in quantizer steps) and
// frequency f (cycles per input sample); |e| <= 1/2 keeps |v| below amp + 4,
// so an amplitude up to 11 never overloads the quantizer.
package sdm3_pkg;

  class sdm3;
    real amp, f, e1, e2, e3;
    longint n;

    function new(real amp_i, real f_i);
      amp = amp_i; f = f_i; e1 = 0; e2 = 0; e3 = 0; n = 0;
    endfunction

    // next 5-bit output code
    function int next();
      real u, v;
      int  y;
      u = amp * $sin(2.0 * 3.14159265358979 * f * real'(n));
      v = u - 3.0 * e1 + 3.0 * e2 - e3;
      y = int'($floor(v + 0.5));
      if (y > 15)  y = 15;
      if (y < -16) y = -16;
      e3 = e2; e2 = e1; e1 = real'(y) - v;
      n++;
      return y;
    endfunction
  endclass

endpackage
