// mr_hrc -- mixed-radix hyperbolic rotation CORDIC (MR-HRC): computes
// cosh(z_in) and sinh(z_in) for |z_in| <= 0.5.
//
// The vector starts as (x, y, z) = (1/Kh, 0, z_in), passes through the
// radix-2 stages j = 2..9 (r2_hrc), whose output (x10, y10, z10) feeds the
// radix-4 stages j = 4..7 (r4_hrc). Kh is the gain of the radix-2 stages
// only; the radix-4 gain is taken as one. After the last stage x holds
// cosh(z_in) and y holds sinh(z_in); the residual angle is dropped.
//
// Interface: Q2.14 angle in, Q2.14 cosh/sinh out, with valid bits.
// Timing: latency (R2_J_LAST-R2_J_FIRST+1) + (R4_J_LAST-R4_J_FIRST+1) = 12
// cycles, one angle per cycle, no stalls.
//
// The structure (start vector, radix-2 then radix-4) follows the original
// description; computing 1/Kh over the radix-2 iterations only is the
// reading of its remark that 1/Kh compensates the radix-2 gain.
module mr_hrc
  import cordic_pkg::*;
#(
  parameter int R2_J_FIRST = 2,
  parameter int R2_J_LAST  = 9,
  parameter int R4_J_FIRST = 4,
  parameter int R4_J_LAST  = 7
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fix_t z_in,
  output logic out_valid,
  output fix_t cosh_out,
  output fix_t sinh_out
);

  localparam fix_t X0 = inv_kh(R2_J_FIRST, R2_J_LAST);

  vec_t v0, v10, vn;
  logic valid10;

  assign v0 = '{x: X0, y: '0, z: z_in};

  r2_hrc #(.J_FIRST(R2_J_FIRST), .J_LAST(R2_J_LAST)) u_r2 (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .in_vec   (v0),
    .out_valid(valid10),
    .out_vec  (v10)
  );

  r4_hrc #(.J_FIRST(R4_J_FIRST), .J_LAST(R4_J_LAST)) u_r4 (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (valid10),
    .in_vec   (v10),
    .out_valid(out_valid),
    .out_vec  (vn)
  );

  assign cosh_out = vn.x;
  assign sinh_out = vn.y;

endmodule
