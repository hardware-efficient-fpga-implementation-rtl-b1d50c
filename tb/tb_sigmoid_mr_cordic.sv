// tb_sigmoid_mr_cordic -- end-to-end, full-size testbench of the sigmoid unit
// at its default parameters.
//
// Applies every Q2.14 input theta in [-1, 1] (32769 values), mostly back to
// back with some idle cycles, and compares each output with 1/(1 + e^-theta)
// computed in real arithmetic. Checks: each error below 4.0e-4, the mean
// absolute error below 4.23e-4, output order, and a latency of exactly 28
// cycles. It counts how often each internal mechanism was exercised (both
// rotation directions of the radix-2 and vectoring stages, every radix-4
// digit in every radix-4 stage that can reach it, idle cycles in the stream) and counts a failure
// for any that never happened. Finally it checks that reset empties the
// pipeline: samples in flight when reset is asserted never come out.
module tb_sigmoid_mr_cordic;

  localparam int LAT = 28;
  localparam int NS  = 32769;
  localparam real LSB = 2.0 ** (-14);

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [15:0] theta, sigmoid;
  int checks = 0, failures = 0, cycle = 0, n_out = 0, after_flush = 0;
  int n_bubble = 0, r2_pos = 0, r2_neg = 0, lvc_pos = 0, lvc_neg = 0;
  int r4_hits [4][5];
  real sum_err = 0.0, max_err = 0.0;
  int t_hist [NS];
  bit done = 0, flushing = 0;

  sigmoid_mr_cordic dut (.*);

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

  // Mechanism counters, read from inside the pipeline.
  always @(posedge clk) if (rst_n) begin
    if (dut.u_mr_hrc.u_r2.valid[0]) begin
      if (dut.u_mr_hrc.u_r2.g_iter[0].u_iter.pos) r2_pos++; else r2_neg++;
    end
    if (dut.u_lvc.valid[1]) begin
      if (dut.u_lvc.g_iter[1].u_iter.pos) lvc_pos++; else lvc_neg++;
    end
    if (dut.u_mr_hrc.u_r4.valid[0])
      r4_hits[0][int'(dut.u_mr_hrc.u_r4.g_iter[0].u_iter.sigma) + 2]++;
    if (dut.u_mr_hrc.u_r4.valid[1])
      r4_hits[1][int'(dut.u_mr_hrc.u_r4.g_iter[1].u_iter.sigma) + 2]++;
    if (dut.u_mr_hrc.u_r4.valid[2])
      r4_hits[2][int'(dut.u_mr_hrc.u_r4.g_iter[2].u_iter.sigma) + 2]++;
    if (dut.u_mr_hrc.u_r4.valid[3])
      r4_hits[3][int'(dut.u_mr_hrc.u_r4.g_iter[3].u_iter.sigma) + 2]++;
  end

  initial begin : stim
    theta = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < NS; i++) begin
      @(posedge clk);
      if (i % 113 == 50) begin in_valid <= 0; n_bubble++; @(posedge clk); end
      in_valid <= 1;
      theta    <= 16'(-16384 + i);
      t_hist[i] = cycle;
    end
    @(posedge clk);
    in_valid <= 0;
    wait (done);
    // Reset while samples are in flight: none of them may come out.
    repeat (2) @(posedge clk);
    for (int i = 0; i < 10; i++) begin
      in_valid <= 1;
      theta    <= 16'(i * 100);
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    rst_n    <= 0;
    flushing <= 1;
    @(posedge clk);
    rst_n <= 1;
    repeat (LAT + 10) @(posedge clk);
    check(after_flush == 0, $sformatf("%0d samples survived reset", after_flush));
    check(n_bubble > 0, "no idle cycle in the input stream");
    check(r2_pos > 0 && r2_neg > 0, "radix-2 rotation used only one direction");
    check(lvc_pos > 0 && lvc_neg > 0, "vectoring used only one direction");
    // In Q2.14 the residual entering the last radix-4 stage (j=7) is an
    // integer number of LSBs in [-2, 1], so its digit +2 (w >= 1.5) is
    // unreachable; every other (stage, digit) pair must occur.
    for (int s = 0; s < 4; s++)
      for (int d = 0; d < 5; d++)
        if (!(s == 3 && d == 4))
          check(r4_hits[s][d] > 0, $sformatf("radix-4 stage j=%0d never chose digit %0d", s + 4, d - 2));
    $display("idle input cycles %0d, radix-2 j=2 directions +%0d/-%0d, vectoring j=1 +%0d/-%0d",
             n_bubble, r2_pos, r2_neg, lvc_pos, lvc_neg);
    for (int s = 0; s < 4; s++)
      $display("radix-4 j=%0d digit counts -2..2: %p", s + 4, r4_hits[s]);
    $display("mean |error| = %e, max |error| = %e", sum_err / NS, max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    if (flushing) after_flush++;
    else if (n_out < NS) begin
      real th, want, e;
      th   = real'(-16384 + n_out) * LSB;
      want = 1.0 / (1.0 + $exp(-th));
      e    = fabs(real'($signed(sigmoid)) * LSB - want);
      sum_err += e;
      if (e > max_err) max_err = e;
      check(cycle - t_hist[n_out] == LAT + 1,
            $sformatf("latency %0d", cycle - t_hist[n_out] - 1));
      check(e < 4.0e-4, $sformatf("theta=%f got %f want %f", th, real'($signed(sigmoid)) * LSB, want));
      n_out <= n_out + 1;
      if (n_out == NS - 1) begin
        check(sum_err / NS < 4.23e-4, $sformatf("MAE %e", sum_err / NS));
        done = 1;
      end
    end
  end

  initial begin : watchdog
    repeat (NS + NS / 100 + 400) @(posedge clk);
    failures++;
    $display("watchdog: %0d of %0d results", n_out, NS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
