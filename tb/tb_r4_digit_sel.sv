// tb_r4_digit_sel -- self-checking testbench for the radix-4 digit selection.
//
// Two instances, for iterations J = 4 and J = 7, are driven with every 16-bit
// residual value whose scaled residual w = 4^J * z lies in the selection's
// domain |w| < 4. The expected digit is computed with real arithmetic from w
// and the comparison constants +-0.5 and +-1.5.
module tb_r4_digit_sel;
  import cordic_pkg::*;

  fix_t z;
  logic signed [2:0] sigma4, sigma7;
  int checks = 0, failures = 0;
  int hits [5];

  r4_digit_sel #(.J(4)) dut4 (.z(z), .sigma(sigma4));
  r4_digit_sel #(.J(7)) dut7 (.z(z), .sigma(sigma7));

  function automatic int ref_digit(fix_t zz, int j);
    real w;
    w = real'(zz) * (2.0 ** (-F)) * (4.0 ** j);
    if (w >= 1.5)  return 2;
    if (w >= 0.5)  return 1;
    if (w >= -0.5) return 0;
    if (w >= -1.5) return -1;
    return -2;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin : run
    for (int v = -32768; v < 32768; v++) begin
      z = fix_t'(v);
      #1;
      if (v > -256 && v < 256) begin       // |4^4 z| < 4
        check(int'(sigma4) == ref_digit(z, 4), $sformatf("J=4 z=%0d sigma=%0d", v, sigma4));
        hits[int'(sigma4) + 2]++;
      end
      if (v > -4 && v < 4)                 // |4^7 z| < 4
        check(int'(sigma7) == ref_digit(z, 7), $sformatf("J=7 z=%0d sigma=%0d", v, sigma7));
    end
    // every digit value must have been produced
    for (int d = 0; d < 5; d++) check(hits[d] > 0, $sformatf("digit %0d never selected", d - 2));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
