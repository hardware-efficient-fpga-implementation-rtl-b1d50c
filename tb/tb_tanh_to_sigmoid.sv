// tb_tanh_to_sigmoid -- self-checking testbench for the (1 + tanh)/2 stage.
//
// Every Q2.14 value in (-1, 1) is applied, one per clock; each output must be
// floor((t + 2^14) / 2) and arrive exactly one cycle after its input.
module tb_tanh_to_sigmoid;
  import cordic_pkg::*;

  localparam int NS = 32767;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  fix_t tanh_in, sigmoid_out;
  int checks = 0, failures = 0, cycle = 0, n_out = 0;
  int t_hist [NS];

  tanh_to_sigmoid dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin : stim
    tanh_in = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < NS; i++) begin
      @(posedge clk);
      in_valid <= 1;
      tanh_in  <= fix_t'(-16383 + i);
      t_hist[i] = cycle;
    end
    @(posedge clk);
    in_valid <= 0;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int t, want;
    t    = -16383 + n_out;
    want = (t + 16384) / 2;          // t + 16384 >= 1, so division floors
    check(cycle - t_hist[n_out] == 2, "latency");
    check(int'(sigmoid_out) == want, $sformatf("t=%0d got %0d want %0d", t, sigmoid_out, want));
    n_out <= n_out + 1;
    if (n_out == NS - 1) begin
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
