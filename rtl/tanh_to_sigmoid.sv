// tanh_to_sigmoid -- output stage: sigmoid = (1 + tanh) / 2.
//
// Adds the constant one to the Q2.14 tanh value and halves the sum with an
// arithmetic right shift (the shift truncates towards minus infinity). For
// tanh in (-1, 1) the sum stays inside Q2.14. The result is registered.
//
// Interface: Q2.14 tanh in, Q2.14 sigmoid out, with valid bits.
// Timing: latency 1 cycle, one value per cycle; only valid is reset.
//
// The add-and-halve operation follows the original description; the output
// register is this implementation's choice.
module tanh_to_sigmoid
  import cordic_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fix_t tanh_in,
  output logic out_valid,
  output fix_t sigmoid_out
);

  fix_t sum;

  assign sum = tanh_in + ONE;

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    if (in_valid) sigmoid_out <= sum >>> 1;
  end

endmodule
