// tb_mr_hrc -- self-checking testbench for the mixed-radix hyperbolic
// rotator.
//
// Sweeps the angle over [-0.5, 0.5] in steps of 2 LSB, one angle per clock
// with occasional idle cycles, and checks cosh and sinh against real math
// within 8 LSB, and that every result appears exactly 12 cycles after its
// angle.
module tb_mr_hrc;
  import cordic_pkg::*;

  localparam int LAT = 12;
  localparam int NS  = 8193;
  localparam real LSB = 2.0 ** (-F);

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  fix_t z_in, cosh_out, sinh_out;
  int checks = 0, failures = 0, cycle = 0, n_out = 0;
  real max_err = 0.0;
  fix_t z_hist [NS];
  int   t_hist [NS];

  mr_hrc dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin : stim
    z_in = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < NS; i++) begin
      @(posedge clk);
      if (i % 61 == 7) begin in_valid <= 0; @(posedge clk); end
      in_valid <= 1;
      z_in     <= fix_t'(-8192 + 2 * i);
      z_hist[i] = fix_t'(-8192 + 2 * i);
      t_hist[i] = cycle;
    end
    @(posedge clk);
    in_valid <= 0;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    real a, ec, es;
    a  = real'(z_hist[n_out]) * LSB;
    ec = fabs(real'(cosh_out) * LSB - $cosh(a));
    es = fabs(real'(sinh_out) * LSB - $sinh(a));
    if (ec > max_err) max_err = ec;
    if (es > max_err) max_err = es;
    check(cycle - t_hist[n_out] == LAT + 1, "latency");
    check(ec < 8 * LSB, $sformatf("cosh(%f) err %f LSB", a, ec / LSB));
    check(es < 8 * LSB, $sformatf("sinh(%f) err %f LSB", a, es / LSB));
    n_out <= n_out + 1;
    if (n_out == NS - 1) begin
      $display("max |error| = %f LSB", max_err / LSB);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin : watchdog
    repeat (2 * NS + 200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
