// tb_r2_hrc -- self-checking testbench for the radix-2 hyperbolic rotator
// (iterations 2..9).
//
// Streams the start vector (1/Kh, 0, z) for z swept over [-0.5, 0.5] back to
// back, one per clock, with a few idle cycles in between. For every result it
// checks, against real-number math: the residual angle is below 0.0068, and
// x, y equal cosh and sinh of the angle actually rotated (z - residual) within
// 6 LSB. It also checks that each result appears exactly 8 cycles after its
// input.
module tb_r2_hrc;
  import cordic_pkg::*;

  localparam int LAT = 8;
  localparam int NS  = 4097;
  localparam real LSB = 2.0 ** (-F);

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  vec_t in_vec, out_vec;
  int checks = 0, failures = 0, cycle = 0, n_in = 0, n_out = 0;
  fix_t z_hist [NS];
  int   t_hist [NS];

  r2_hrc dut (.*);

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
    real kh;
    kh = 1.0;
    for (int j = 2; j <= 9; j++) kh = kh * $sqrt(1.0 - 2.0 ** (-2 * j));
    in_vec = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < NS; i++) begin
      @(posedge clk);
      if (i % 97 == 5) begin in_valid <= 0; @(posedge clk); end
      in_valid  <= 1;
      in_vec.x  <= fix_t'($rtoi((1.0 / kh) * 2.0 ** F + 0.5));
      in_vec.y  <= '0;
      in_vec.z  <= fix_t'(-8192 + 4 * i);
      z_hist[i] = fix_t'(-8192 + 4 * i);
      t_hist[i] = cycle;
    end
    @(posedge clk);
    in_valid <= 0;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    real a, res;
    res = real'(out_vec.z) * LSB;
    a   = real'(z_hist[n_out]) * LSB - res;
    check(cycle - t_hist[n_out] == LAT + 1, $sformatf("latency %0d", cycle - t_hist[n_out] - 1));
    check(res < 0.0068 && res > -0.0068, $sformatf("residual %f", res));
    check(fabs(real'(out_vec.x) * LSB - $cosh(a)) < 6 * LSB, $sformatf("cosh(%f)", a));
    check(fabs(real'(out_vec.y) * LSB - $sinh(a)) < 6 * LSB, $sformatf("sinh(%f)", a));
    n_out <= n_out + 1;
    if (n_out == NS - 1) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin : watchdog
    repeat (NS * 2 + 200) @(posedge clk);
    failures++;
    $display("watchdog: %0d of %0d results", n_out, NS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
