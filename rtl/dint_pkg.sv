// dint_pkg -- shared constants, types and reference arithmetic of the dINT number format.
//
// dINT ("integer with denormal") is a b-bit integer code that spends two of its 2^b code points
// on special values of magnitude half a quantization step, so that weights too small for the
// uniform grid are not flushed to zero. The remaining 2^b-2 codes are the uniform integers
// 0 .. P with P = 2^b-3, interpreted asymmetrically around a zero-point z:
//     value = (code - z) * s        for code in 0..P
//     value = +s/2                  for code C1
//     value = -s/2                  for code C2
// The number of uniform steps P = 2^b-3 and the half-step special magnitude follow the format's
// definition. Which two bit patterns carry C1 and C2 is not fixed by that definition; this design
// uses the two largest codes, C1 = 2^b-2 and C2 = 2^b-1, which keeps the uniform codes a plain
// binary range starting at 0.
//
// Everything in the datapath is kept in units of half a step (s/2), in which every dINT value is
// an integer: uniform codes become 2*(code - z), the specials become +1 and -1.
package dint_pkg;

  // Default widths: 4-bit weights/Value (dINT4) and 8-bit activations (INT8).
  parameter int unsigned WBITS_DEFAULT = 4;
  parameter int unsigned ABITS_DEFAULT = 8;
  // Accumulator width: 32 bits holds 36,864 worst-case dINT4 x INT8 products (see README).
  parameter int unsigned ACCW_DEFAULT  = 32;

  // Largest uniform code P = 2^b - 3 for a b-bit dINT.
  function automatic int unsigned dint_pmax(int unsigned b);
    return (1 << b) - 3;
  endfunction

  // Positive and negative special codes.
  function automatic int unsigned dint_c1(int unsigned b);
    return (1 << b) - 2;
  endfunction

  function automatic int unsigned dint_c2(int unsigned b);
    return (1 << b) - 1;
  endfunction

  // Classification of a dINT code, used for statistics and assertions.
  typedef enum logic [1:0] {
    CODE_UNIFORM = 2'd0,
    CODE_C1      = 2'd1,
    CODE_C2      = 2'd2
  } code_kind_e;

endpackage
