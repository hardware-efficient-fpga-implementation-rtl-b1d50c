// r4_hrc_iter -- one radix-4 hyperbolic rotation CORDIC iteration with its
// pipeline register.
//
// The digit sigma in {-2..2} comes from r4_digit_sel. Each coordinate picks
// the other coordinate times |sigma| * 4^-J through a three-way multiplexer
// (shifted left by one for 2, unchanged for 1, zero for 0, then right by 2J;
// the two shifts are merged into one right shift by 2J-1 or 2J so that no
// intermediate can overflow 16 bits) and adds or subtracts it according to
// the sign of sigma:
//     x' = x + sigma * y * 4^-J
//     y' = y + sigma * x * 4^-J
//     z' = z - sign(sigma) * {atanh(2*4^-J), atanh(4^-J), 0}[|sigma|]
// The gain sqrt(1 - sigma^2 4^-2J) is within 3.1e-5 of one for J >= 4 and is
// not compensated. Critical path: digit compare, multiplexer, adder.
// Latency 1 cycle, throughput one vector per cycle; only valid is reset.
//
// The multiplexer structure, the digit set and the absence of gain
// correction follow the original description; merging the shifts and the
// range assertion are this implementation's additions.
module r4_hrc_iter
  import cordic_pkg::*;
#(
  parameter int J = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  vec_t in_vec,
  output logic out_valid,
  output vec_t out_vec
);

  localparam fix_t ANG1 = atanh_r4(J, 1);
  localparam fix_t ANG2 = atanh_r4(J, 2);

  logic signed [2:0] sigma;
  fix_t mx, my, ang;       // |sigma|*x*4^-J, |sigma|*y*4^-J, angle for |sigma|
  vec_t nxt;
  logic neg;

  r4_digit_sel #(.J(J)) u_sel (
    .z    (in_vec.z),
    .sigma(sigma)
  );

  always_comb begin
    neg = sigma[2];
    unique case (sigma)
      3'sd2, -3'sd2: begin
        mx = in_vec.x >>> (2 * J - 1); my = in_vec.y >>> (2 * J - 1); ang = ANG2;
      end
      3'sd1, -3'sd1: begin
        mx = in_vec.x >>> (2 * J);     my = in_vec.y >>> (2 * J);     ang = ANG1;
      end
      default: begin
        mx = '0;                       my = '0;                       ang = '0;
      end
    endcase
    nxt.x = neg ? in_vec.x - my : in_vec.x + my;
    nxt.y = neg ? in_vec.y - mx : in_vec.y + mx;
    nxt.z = neg ? in_vec.z + ang              : in_vec.z - ang;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    if (in_valid) out_vec <= nxt;
  end

  // Convergence rule of the radix-4 stage: the scaled residual 4^J * z that
  // enters an iteration must stay within the reach of the digit set, |w| < 3
  // (the selection leaves at most |w - sigma| <= 2/3 for |w| <= 8/3).
  localparam int WW = W + 2 * J;
  logic signed [WW-1:0] w_in;
  assign w_in = (WW)'(in_vec.z) <<< (2 * J);

  a_residual_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (w_in < (3 <<< F)) && (w_in > -(3 <<< F)));

endmodule
