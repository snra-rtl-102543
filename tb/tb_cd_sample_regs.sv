// tb_cd_sample_regs: checks the v/h/v_bar/h_bar registers at default size
// (800 x 800). Random vectors are presented with random capture strobes; a
// testbench copy of the four registers predicts every output, including the
// next-value output h_bar_d, and reset clearing.
module tb_cd_sample_regs;
  localparam int NV = 800, NH = 800;
  logic clk = 0, rst = 1, cap_vh = 0, cap_vbar = 0, cap_hbar = 0;
  logic [NV-1:0] vis_in, vis_sense, v, v_bar, ev, evb;
  logic [NH-1:0] hid_sense, h, h_bar, h_bar_d, eh, ehb;
  int checks = 0, failures = 0;

  cd_sample_regs #(.NV(NV), .NH(NH)) dut (.*);
  always #1ns clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [799:0] rnd800();
    logic [799:0] r;
    for (int k = 0; k < 25; k++) r[k*32 +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vis_in = '0; vis_sense = '0; hid_sense = '0;
    @(negedge clk); @(negedge clk);
    chk(v == 0 && h == 0 && v_bar == 0 && h_bar == 0, "reset clears");
    rst = 0; ev = 0; eh = 0; evb = 0; ehb = 0;
    repeat (300) begin
      @(negedge clk);
      vis_in = rnd800(); vis_sense = rnd800(); hid_sense = rnd800();
      cap_vh = ($urandom % 3) == 0; cap_vbar = ($urandom % 3) == 0; cap_hbar = ($urandom % 3) == 0;
      #0.1ns;
      chk(h_bar_d == (cap_hbar ? hid_sense : ehb), "h_bar_d next value");
      if (cap_vh) begin ev = vis_in; eh = hid_sense; end
      if (cap_vbar) evb = vis_sense;
      if (cap_hbar) ehb = hid_sense;
      @(posedge clk); #0.1ns;
      chk(v == ev && h == eh, "v/h");
      chk(v_bar == evb && h_bar == ehb, "v_bar/h_bar");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
