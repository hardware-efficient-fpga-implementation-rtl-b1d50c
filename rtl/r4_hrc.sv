// r4_hrc -- radix-4 hyperbolic rotation CORDIC (R4-HRC), iterations
// j = J_FIRST..J_LAST (4..7), fully pipelined.
//
// Second half of the mixed-radix rotator. Each iteration uses a digit from
// {-2, -1, 0, 1, 2} and so resolves two bits of angle per stage. Starting at
// j = 4, the reach of the four stages, sum_j atanh(2 * 4^-j) = 0.0104, covers
// the residual (< 0.0067) left by the radix-2 stages, and the angles are so
// small that the gain of each iteration is one to within 3.1e-5, so no
// scale-factor correction is applied.
//
// Interface: in_vec/out_vec carry (x, y, z) in Q2.14 with a valid bit.
// Timing: latency J_LAST-J_FIRST+1 = 4 cycles, one vector per cycle.
//
// The range j = 4..7 follows the original description.
module r4_hrc
  import cordic_pkg::*;
#(
  parameter int J_FIRST = 4,
  parameter int J_LAST  = 7
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  vec_t in_vec,
  output logic out_valid,
  output vec_t out_vec
);

  localparam int N = J_LAST - J_FIRST + 1;

  logic valid [N+1];
  vec_t vec   [N+1];

  assign valid[0] = in_valid;
  assign vec[0]   = in_vec;

  for (genvar i = 0; i < N; i++) begin : g_iter
    r4_hrc_iter #(.J(J_FIRST + i)) u_iter (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (valid[i]),
      .in_vec   (vec[i]),
      .out_valid(valid[i+1]),
      .out_vec  (vec[i+1])
    );
  end

  assign out_valid = valid[N];
  assign out_vec   = vec[N];

endmodule
