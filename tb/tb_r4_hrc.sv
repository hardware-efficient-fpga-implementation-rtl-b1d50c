// tb_r4_hrc -- self-checking testbench for the radix-4 hyperbolic rotator
// (iterations 4..7).
//
// Inputs are start vectors (cosh b, sinh b, z) with b random in [-0.5, 0.5]
// and z random within the stage's reach, |z| <= 0.0104, one per clock. With
// a = z - residual the angle actually rotated, the checks against real math
// are: |residual| <= 3 LSB, x = cosh(b + a) and y = sinh(b + a) within 5 LSB
// (four truncating shifts, input rounding, unit-gain approximation).
// Each result must appear exactly 4 cycles after its input. The digit values
// used by the first iteration are counted; each of -2..2 must occur.
module tb_r4_hrc;
  import cordic_pkg::*;

  localparam int LAT = 4;
  localparam int NS  = 5000;
  localparam real LSB = 2.0 ** (-F);

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  vec_t in_vec, out_vec;
  int checks = 0, failures = 0, cycle = 0, n_out = 0;
  real b_hist [NS];
  fix_t z_hist [NS];
  int  t_hist [NS];
  int  hits [5];

  r4_hrc dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic fix_t fx(real r);
    return fix_t'($rtoi(r * 2.0 ** F + ((r >= 0.0) ? 0.5 : -0.5)));
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk) if (rst_n && dut.valid[0]) hits[int'(dut.g_iter[0].u_iter.sigma) + 2]++;

  initial begin : stim
    real b;
    fix_t z;
    in_vec = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < NS; i++) begin
      @(posedge clk);
      b = (real'($urandom_range(10000)) / 10000.0) - 0.5;
      z = fix_t'(int'($urandom_range(340)) - 170);     // +-170 LSB = +-0.0104
      in_valid <= 1;
      in_vec   <= '{x: fx($cosh(b)), y: fx($sinh(b)), z: z};
      b_hist[i] = b;
      z_hist[i] = z;
      t_hist[i] = cycle;
    end
    @(posedge clk);
    in_valid <= 0;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    real a, res;
    res = real'(out_vec.z) * LSB;
    a   = b_hist[n_out] + real'(z_hist[n_out]) * LSB - res;
    check(cycle - t_hist[n_out] == LAT + 1, "latency");
    check(fabs(res) <= 3 * LSB, $sformatf("residual %f", res));
    check(fabs(real'(out_vec.x) * LSB - $cosh(a)) < 5 * LSB,
          $sformatf("cosh(%f) err %f LSB", a, (real'(out_vec.x) * LSB - $cosh(a)) / LSB));
    check(fabs(real'(out_vec.y) * LSB - $sinh(a)) < 5 * LSB, $sformatf("sinh(%f)", a));
    n_out <= n_out + 1;
    if (n_out == NS - 1) begin
      for (int d = 0; d < 5; d++) check(hits[d] > 0, $sformatf("digit %0d never used", d - 2));
      $display("digit use in iteration 4: %p", hits);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin : watchdog
    repeat (NS + 200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
