// r2_lvc -- radix-2 linear vectoring CORDIC (R2-LVC): z_out = y_in / x_in.
//
// Used as a shift-and-add divider: started with (x, y, z) = (cosh, sinh, 0)
// it returns tanh = sinh / cosh in z. Iterations j = J_FIRST..J_LAST each
// resolve one quotient bit of weight 2^-j. With J_FIRST = 0 the convergence
// range is |y/x| <= 2; the iteration count is this implementation's choice:
// J_LAST = 14 runs down to the LSB of the Q2.14 format. x_in must be
// positive (cosh >= 1 here).
//
// Interface: Q2.14 x_in, y_in in, Q2.14 quotient out, with valid bits.
// Timing: latency J_LAST-J_FIRST+1 = 15 cycles, one division per cycle.
//
// The vectoring method follows the original description; the iteration range
// is this implementation's choice, as stated above.
module r2_lvc
  import cordic_pkg::*;
#(
  parameter int J_FIRST = 0,
  parameter int J_LAST  = 14
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fix_t x_in,
  input  fix_t y_in,
  output logic out_valid,
  output fix_t z_out
);

  localparam int N = J_LAST - J_FIRST + 1;

  logic valid [N+1];
  vec_t vec   [N+1];

  assign valid[0] = in_valid;
  assign vec[0]   = '{x: x_in, y: y_in, z: '0};

  for (genvar i = 0; i < N; i++) begin : g_iter
    r2_lvc_iter #(.J(J_FIRST + i)) u_iter (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (valid[i]),
      .in_vec   (vec[i]),
      .out_valid(valid[i+1]),
      .out_vec  (vec[i+1])
    );
  end

  assign out_valid = valid[N];
  assign z_out     = vec[N].z;

  // The divisor must be positive for the sign-of-y direction rule to converge.
  a_divisor_positive: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> x_in > 0);

endmodule
