// r2_hrc -- radix-2 hyperbolic rotation CORDIC (R2-HRC), iterations
// j = J_FIRST..J_LAST (2..9), fully pipelined.
//
// This is the first half of the mixed-radix rotator. Starting the radix-2
// iterations at j = 2 gives a convergence range of about +-0.5, enough for
// the angle theta/2 with |theta| <= 1; after j = 9 the residual angle is below
// about 0.0067 and is handed to the radix-4 stage. The gain of these
// iterations, Kh = prod sqrt(1 - 2^-2j), is not corrected here: the caller
// starts with x = 1/Kh (see mr_hrc).
//
// Interface: in_vec/out_vec carry (x, y, z) in Q2.14 with a valid bit.
// Timing: one iteration per pipeline stage, latency J_LAST-J_FIRST+1 = 8
// cycles, throughput one vector per cycle.
//
// The range j = 2..9 and one register per iteration follow the original
// description; leaving out the repeated iterations of textbook hyperbolic
// CORDIC follows it too (it lists only j = 2..9).
module r2_hrc
  import cordic_pkg::*;
#(
  parameter int J_FIRST = 2,
  parameter int J_LAST  = 9
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
    r2_hrc_iter #(.J(J_FIRST + i)) u_iter (
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
