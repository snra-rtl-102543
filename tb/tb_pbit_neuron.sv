// tb_pbit_neuron: statistical check of the p-bit model. For a set of input
// currents it counts ones over 4000 clocks and compares the fraction with
// 1/(1+exp(-I/I0)) computed in the testbench (tolerance 0.04, about five
// standard deviations); it also checks that the output changes from cycle to
// cycle at zero input (the device is random, not stuck).
module tb_pbit_neuron;
  logic clk = 0;
  int   i_in = 0;
  logic v_out;
  int checks = 0, failures = 0;

  pbit_neuron #(.I0(1.0)) dut (.*);
  always #1ns clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cur [7] = '{0, 1, -1, 2, -3, 8, -8};
    @(negedge clk);
    foreach (cur[k]) begin
      int ones, flips;
      logic last;
      real p, f;
      ones = 0; flips = 0;
      i_in = cur[k];
      @(negedge clk); last = v_out;
      for (int n = 0; n < 4000; n++) begin
        @(negedge clk);
        ones += int'(v_out);
        flips += int'(v_out != last);
        last = v_out;
      end
      p = 1.0 / (1.0 + $exp(-real'(cur[k])));
      f = real'(ones) / 4000.0;
      chk((f - p) < 0.04 && (p - f) < 0.04, $sformatf("I=%0d: %f vs %f", cur[k], f, p));
      if (cur[k] == 0) chk(flips > 1000, "fluctuates at I=0");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
