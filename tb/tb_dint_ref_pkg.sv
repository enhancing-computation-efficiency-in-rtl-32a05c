// tb_dint_ref_pkg -- reference model of the dINT format for the testbenches.
//
// Written independently of the RTL: it works on real numbers, straight from the textbook form of
// the rules, rather than on the integer comparisons and half-step units the hardware uses.
//   ref_quant : C1 for s/4 < x <= 3s/4, C2 for -3s/4 <= x < -s/4, else clamp(round(x/s)+z, 0, P)
//               with round-half-away-from-zero; C1 = 2^b-2, C2 = 2^b-1.
//   ref_deq   : dequantized value in units of one step: code-z, +0.5 or -0.5.
package tb_dint_ref_pkg;

  function automatic int ref_quant(int b, int x, int s, int z);
    real r, q;
    int  p, t;
    p = (1 << b) - 3;
    r = real'(x) / real'(s);
    if (r > 0.25 && r <= 0.75)   return (1 << b) - 2;
    if (r >= -0.75 && r < -0.25) return (1 << b) - 1;
    if (r >= 0.0) q = $floor(r + 0.5);
    else          q = -$floor(-r + 0.5);
    t = int'(q) + z;
    if (t < 0) t = 0;
    if (t > p) t = p;
    return t;
  endfunction

  function automatic bit ref_clamped(int b, int x, int s, int z);
    real r, q;
    int  t;
    r = real'(x) / real'(s);
    if ((r > 0.25 && r <= 0.75) || (r >= -0.75 && r < -0.25)) return 1'b0;
    if (r >= 0.0) q = $floor(r + 0.5);
    else          q = -$floor(-r + 0.5);
    t = int'(q) + z;
    return (t < 0) || (t > (1 << b) - 3);
  endfunction

  function automatic real ref_deq(int b, int code, int z);
    if (code == (1 << b) - 2) return 0.5;
    if (code == (1 << b) - 1) return -0.5;
    return real'(code - z);
  endfunction

endpackage
