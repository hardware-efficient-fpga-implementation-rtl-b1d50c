// r2_hrc_iter -- one radix-2 hyperbolic rotation CORDIC iteration with its
// pipeline register.
//
// Rotation mode: the direction d = +1 when the residual angle z >= 0, else -1,
// and
//     x' = x + d * (y >>> J)
//     y' = y + d * (x >>> J)
//     z' = z - d * atanh(2^-J)
// The shifts are fixed wiring and the three add/subtracts work in parallel, so
// the critical path is one adder. The result is registered: latency 1 cycle,
// one new vector accepted every cycle. Only the valid bit is reset; the data
// register is loaded whenever in_valid is high and holds otherwise.
//
// The iteration structure, its shift-and-add form and the sign-of-z rule
// follow the original description; the truncating shifts, rounded angle
// constants and valid/reset scheme are this implementation's choices.
module r2_hrc_iter
  import cordic_pkg::*;
#(
  parameter int J = 2      // iteration index j (shift amount)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  vec_t in_vec,
  output logic out_valid,
  output vec_t out_vec
);

  localparam fix_t ALPHA = atanh_r2(J);

  vec_t nxt;
  logic pos;

  always_comb begin
    pos   = !in_vec.z[W-1];
    nxt.x = pos ? in_vec.x + (in_vec.y >>> J) : in_vec.x - (in_vec.y >>> J);
    nxt.y = pos ? in_vec.y + (in_vec.x >>> J) : in_vec.y - (in_vec.x >>> J);
    nxt.z = pos ? in_vec.z - ALPHA            : in_vec.z + ALPHA;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    if (in_valid) out_vec <= nxt;
  end

endmodule
