// r2_lvc_iter -- one radix-2 linear vectoring CORDIC iteration with its
// pipeline register.
//
// Vectoring mode drives y towards zero: d = +1 when y >= 0, else -1, and
//     x' = x
//     y' = y - d * (x >>> J)
//     z' = z + d * 2^-J
// so z accumulates the quotient y0/x0 (x > 0 assumed). Critical path: one
// adder. Latency 1 cycle, one vector per cycle; only valid is reset.
//
// The iteration equations follow the original description; the
// sign-of-y direction rule is the standard one and is this implementation's
// reading.
module r2_lvc_iter
  import cordic_pkg::*;
#(
  parameter int J = 0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  vec_t in_vec,
  output logic out_valid,
  output vec_t out_vec
);

  localparam fix_t STEP = fix_t'(1 <<< (F - J));   // 2^-J in Q2.14

  vec_t nxt;
  logic pos;

  always_comb begin
    pos   = !in_vec.y[W-1];
    nxt.x = in_vec.x;
    nxt.y = pos ? in_vec.y - (in_vec.x >>> J) : in_vec.y + (in_vec.x >>> J);
    nxt.z = pos ? in_vec.z + STEP             : in_vec.z - STEP;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    if (in_valid) out_vec <= nxt;
  end

endmodule
