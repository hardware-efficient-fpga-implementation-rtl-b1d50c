// tb_r2_lvc -- self-checking testbench for the linear vectoring CORDIC
// divider.
//
// Random divisors x in [1.0, 1.25] and dividends y with |y/x| up to 1.9
// (inside the |y/x| <= 2 convergence range) enter one per clock. The quotient
// must match y/x within 16 LSB (each of the 15 iterations
// truncates x >>> j, so y, and hence the quotient, drifts by up to 1 LSB per
// iteration in the worst case, plus 1 LSB of final remainder) and appear exactly 15 cycles later.
module tb_r2_lvc;
  import cordic_pkg::*;

  localparam int LAT = 15;
  localparam int NS  = 5000;
  localparam real LSB = 2.0 ** (-F);

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  fix_t x_in, y_in, z_out;
  int checks = 0, failures = 0, cycle = 0, n_out = 0;
  real max_err = 0.0;
  fix_t x_hist [NS], y_hist [NS];
  int   t_hist [NS];

  r2_lvc dut (.*);

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
    fix_t x, y;
    real q;
    x_in = '0; y_in = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < NS; i++) begin
      @(posedge clk);
      x = fix_t'(16384 + $urandom_range(4096));
      q = (real'($urandom_range(38000)) / 10000.0) - 1.9;
      y = fix_t'($rtoi(q * real'(x)));
      in_valid <= 1;
      x_in <= x;
      y_in <= y;
      x_hist[i] = x;
      y_hist[i] = y;
      t_hist[i] = cycle;
    end
    @(posedge clk);
    in_valid <= 0;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    real q, e;
    q = real'(y_hist[n_out]) / real'(x_hist[n_out]);
    e = fabs(real'(z_out) * LSB - q);
    if (e > max_err) max_err = e;
    check(cycle - t_hist[n_out] == LAT + 1, "latency");
    check(e <= 16 * LSB, $sformatf("%0d/%0d: got %f want %f", y_hist[n_out], x_hist[n_out],
                                  real'(z_out) * LSB, q));
    n_out <= n_out + 1;
    if (n_out == NS - 1) begin
      $display("max |error| = %f LSB", max_err / LSB);
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
