// r4_digit_sel -- radix-4 digit selection for hyperbolic rotation iteration J.
//
// The digit sigma in {-2, -1, 0, +1, +2} is chosen from the scaled residual
// angle w = 4^J * z with the comparison constants +-0.5 and +-1.5:
//     sigma =  2  if w >= 1.5
//              1  if 1.5 > w >= 0.5
//              0  if 0.5 > w >= -0.5
//             -1  if -0.5 > w >= -1.5
//             -2  if -1.5 > w
// (radix-4 SRT-division style: the constants lie in the overlap of the
// selection intervals, so a coarse comparison suffices). Because every
// constant is a multiple of 0.5, only w rounded down to a multiple of 0.5 is
// needed. That is a 4-bit two's-complement number q = floor(2w) (sign, two
// integer bits, one half bit), taken from the bits of z of weight
// 2^(2-2J) .. 2^(-1-2J) (a bit below the LSB of z reads as zero). The digit is
// a small function of these 4 bits:
//     q >= 3 -> 2,  q >= 1 -> 1,  q >= -1 -> 0,  q >= -3 -> -1,  else -2.
// The slice is exact for |w| < 4; the rotation keeps |w| < 3 (asserted in
// r4_hrc_iter), and outside that range the stage would not converge anyway.
// The 4-bit width follows the original description; the bit positions are
// this implementation's derivation for the Q2.14 format. Combinational.
module r4_digit_sel
  import cordic_pkg::*;
#(
  parameter int J = 4
) (
  input  fix_t              z,
  output logic signed [2:0] sigma
);

  localparam int WW = W + 2 * J + 2;
  typedef logic signed [WW-1:0] wide_t;

  wide_t w2;                 // 2 * 4^J * z, in units of 2^-F
  logic signed [3:0] q;      // floor(2 * w)

  always_comb begin
    w2 = wide_t'(z) <<< (2 * J + 1);
    q  = w2[F+3:F];
    if      (q >= 4'sd3)  sigma = 3'sd2;
    else if (q >= 4'sd1)  sigma = 3'sd1;
    else if (q >= -4'sd1) sigma = 3'sd0;
    else if (q >= -4'sd3) sigma = -3'sd1;
    else                  sigma = -3'sd2;
  end

endmodule
