// tb_lut_ff_pair: checks a LUT-FF pair in both output modes. With the select
// cell at 0, o6 follows the LUT combinationally; with it at 1, o6 is the LUT
// output delayed by one clock. o5 is always the 5-input output. Power gating
// clears the flip-flop but keeps the LUT and select cell contents.
module tb_lut_ff_pair;
  logic clk = 0, pwr_en = 1, cfg_we = 0, cfg_bit = 0, o6, o5;
  logic [6:0] cfg_addr = 0;
  logic [5:0] in = 0;
  logic [63:0] tt;
  int checks = 0, failures = 0;

  lut_ff_pair dut (.*);
  always #1ns clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(int a, logic b);
    @(negedge clk); cfg_we = 1; cfg_addr = 7'(a); cfg_bit = b;
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tt = {$urandom, $urandom};
    for (int a = 0; a < 64; a++) wr(a, tt[a]);
    wr(64, 0);
    for (int a = 0; a < 64; a++) begin
      @(negedge clk); in = 6'(a); #0.1ns;
      chk(o6 == tt[a] && o5 == tt[a % 32], "direct mode");
    end
    wr(64, 1);
    @(negedge clk); in = 0;
    for (int a = 1; a < 64; a++) begin
      @(negedge clk);
      chk(o6 == tt[a - 1], $sformatf("registered mode %0d", a));
      in = 6'(a);
      #0.1ns;
      chk(o5 == tt[a % 32], "o5");
    end
    @(negedge clk); pwr_en = 0; #0.1ns;
    chk(o6 == 0 && o5 == 0, "gated outputs 0");
    @(negedge clk); pwr_en = 1; #0.1ns;
    chk(o6 == 0, "flip-flop cleared by gating");
    in = 6'd5;
    @(negedge clk);
    chk(o6 == tt[5], "registered mode kept through gating");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
