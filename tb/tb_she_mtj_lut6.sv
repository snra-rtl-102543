// tb_she_mtj_lut6: configures random truth tables cell by cell and checks,
// for all 64 input combinations, that out1 is the 6-input function and out2
// the 5-input function of the lower 32 cells. Then power-gates the LUT:
// outputs must read 0 and writes must be ignored, and after power returns
// the original truth table must be intact (non-volatility).
module tb_she_mtj_lut6;
  logic clk = 0, pwr_en = 1, cfg_we = 0, cfg_bit = 0, out1, out2;
  logic [5:0] cfg_addr = 0, in = 0;
  logic [63:0] tt;
  int checks = 0, failures = 0;

  she_mtj_lut6 dut (.*);
  always #1ns clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic load_tt(logic [63:0] t);
    for (int a = 0; a < 64; a++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = 6'(a); cfg_bit = t[a];
    end
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic check_all(string msg);
    bit ok = 1;
    for (int a = 0; a < 64; a++) begin
      in = 6'(a); #0.1ns;
      if (out1 != tt[a] || out2 != tt[a % 32]) ok = 0;
    end
    chk(ok, msg);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) begin
      tt = {$urandom, $urandom};
      load_tt(tt);
      check_all("truth table");
    end
    // 6-input AND and two 5-input functions (in[5]=1: out1 = upper half)
    tt = 64'h8000_0000_0000_0000; load_tt(tt); check_all("AND6");
    // power gating
    @(negedge clk); pwr_en = 0;
    begin
      bit ok = 1;
      for (int a = 0; a < 64; a++) begin in = 6'(a); #0.1ns; if (out1 || out2) ok = 0; end
      chk(ok, "gated outputs read 0");
    end
    for (int a = 0; a < 64; a++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = 6'(a); cfg_bit = ~tt[a];
    end
    @(negedge clk); cfg_we = 0; pwr_en = 1;
    check_all("contents kept through power gating");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
