// cordic_pkg -- number format, shared types and constant generators for the
// mixed-radix CORDIC sigmoid pipeline.
//
// Every datapath word is a 16-bit two's-complement fixed-point number with 14
// fraction bits (Q2.14, range [-2, 2), LSB 2^-14). The 16-bit width is the one
// the design is specified for; the split into 2 integer and 14 fraction bits is
// this implementation's choice: it holds cosh(0.5)=1.128, 1/Kh=1.044 and the
// sigmoid input range [-1, 1] without overflow.
//
// The CORDIC angle constants atanh(2^-j), atanh(4^-j), atanh(2*4^-j) and the
// radix-2 gain compensation 1/Kh = 1 / prod_{j} sqrt(1 - 2^-2j) are computed at
// elaboration time from real arithmetic and rounded to the nearest LSB, so no
// table has to be maintained by hand.
package cordic_pkg;

  localparam int W = 16;   // data width
  localparam int F = 14;   // fraction bits

  typedef logic signed [W-1:0] fix_t;

  // One CORDIC vector travelling down the pipeline.
  typedef struct packed {
    fix_t x;
    fix_t y;
    fix_t z;
  } vec_t;

  // Round a real number to the nearest Q2.14 value.
  function automatic fix_t to_fix(real r);
    return fix_t'($rtoi(r * (2.0 ** F) + ((r >= 0.0) ? 0.5 : -0.5)));
  endfunction

  // Radix-2 elementary hyperbolic angle atanh(2^-j).
  function automatic fix_t atanh_r2(int j);
    return to_fix($atanh(2.0 ** (-j)));
  endfunction

  // Radix-4 elementary hyperbolic angle atanh(m * 4^-j), m in {1, 2}.
  function automatic fix_t atanh_r4(int j, int m);
    return to_fix($atanh(real'(m) * (4.0 ** (-j))));
  endfunction

  // Inverse gain of radix-2 hyperbolic iterations j_first..j_last:
  // 1/Kh with Kh = prod sqrt(1 - 2^-2j).
  function automatic fix_t inv_kh(int j_first, int j_last);
    real g = 1.0;
    for (int j = j_first; j <= j_last; j++) g = g * $sqrt(1.0 - 2.0 ** (-2 * j));
    return to_fix(1.0 / g);
  endfunction

  localparam fix_t ONE = fix_t'(1 << F);

endpackage
