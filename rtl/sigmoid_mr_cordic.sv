// sigmoid_mr_cordic -- fully pipelined sigmoid unit, sigmoid(theta) for
// theta in [-1, 1], built from shift-and-add CORDIC stages only.
//
// It uses sigmoid(theta) = (1 + tanh(theta/2)) / 2:
//   1. theta/2 (a wired arithmetic shift) is the angle of the mixed-radix
//      hyperbolic rotator mr_hrc, which returns cosh(theta/2), sinh(theta/2);
//   2. the linear vectoring CORDIC r2_lvc divides them: tanh(theta/2);
//   3. tanh_to_sigmoid adds one and halves.
// No multipliers, no tables: every stage is adders, multiplexers and fixed
// shifts.
//
// Interface: theta and sigmoid are Q2.14 (16 bits, 14 fraction bits) with
// in_valid/out_valid. |theta| must not exceed 1.0; this is checked by an
// assertion. There is no back-pressure: a result leaves every cycle in which
// one entered the latency below earlier.
// Timing: latency = (R2_J_LAST-R2_J_FIRST+1) + (R4_J_LAST-R4_J_FIRST+1) +
// (LVC_J_LAST-LVC_J_FIRST+1) + 1; at the defaults 8 (radix-2) + 4 (radix-4)
// + 15 (vectoring) + 1 (output) = 28 cycles, throughput one sample per
// clock. Reset (synchronous, active low) clears only the valid pipeline.
//
// The three-step structure, the iteration ranges of the rotator and the
// 16-bit width follow the original description. The Q2.14 format, the
// vectoring iteration count (j = 0..14), the valid/reset handshake and the
// output register are this implementation's choices.
module sigmoid_mr_cordic
  import cordic_pkg::*;
#(
  parameter int R2_J_FIRST  = 2,
  parameter int R2_J_LAST   = 9,
  parameter int R4_J_FIRST  = 4,
  parameter int R4_J_LAST   = 7,
  parameter int LVC_J_FIRST = 0,
  parameter int LVC_J_LAST  = 14
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [15:0] theta,
  output logic        out_valid,
  output logic [15:0] sigmoid
);

  fix_t theta_s, z_in, cosh_h, sinh_h, tanh_h, sig;
  logic hrc_valid, lvc_valid;

  assign theta_s = fix_t'(theta);
  assign z_in    = theta_s >>> 1;

  mr_hrc #(
    .R2_J_FIRST(R2_J_FIRST), .R2_J_LAST(R2_J_LAST),
    .R4_J_FIRST(R4_J_FIRST), .R4_J_LAST(R4_J_LAST)
  ) u_mr_hrc (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .z_in     (z_in),
    .out_valid(hrc_valid),
    .cosh_out (cosh_h),
    .sinh_out (sinh_h)
  );

  r2_lvc #(.J_FIRST(LVC_J_FIRST), .J_LAST(LVC_J_LAST)) u_lvc (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (hrc_valid),
    .x_in     (cosh_h),
    .y_in     (sinh_h),
    .out_valid(lvc_valid),
    .z_out    (tanh_h)
  );

  tanh_to_sigmoid u_out (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_valid   (lvc_valid),
    .tanh_in    (tanh_h),
    .out_valid  (out_valid),
    .sigmoid_out(sig)
  );

  assign sigmoid = sig;

  // Input range rule: |theta| <= 1.0.
  a_theta_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (theta_s <= ONE) && (theta_s >= -ONE));

endmodule
