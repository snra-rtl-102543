// tb_update_unit: checks the update datapath. First the paper's 4x2 worked
// example (v=4'b0101, h=2'b01, v_bar=4'b0100, h_bar=2'b10) must give
// BL=4'h5, SL=4'h0 for column 0 and BL=4'h0, SL=4'h4 for column 1; then
// random registers and columns at the default 800 x 800 size are compared
// with v & h[c] and v_bar & h_bar[c] computed bit by bit in the testbench.
module tb_update_unit;
  logic clk = 0;
  int checks = 0, failures = 0;
  always #1ns clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // paper example
  logic rst_s = 1, load_s = 0;
  logic [1:0] col_s = 0;
  logic [3:0] v_s = 4'b0101, vb_s = 4'b0100, bl_s, sl_s;
  logic [1:0] h_s = 2'b01, hb_s = 2'b10;
  update_unit #(.NV(4), .NH(2)) dut_s (
    .clk, .rst(rst_s), .load(load_s), .col(col_s), .v(v_s), .h(h_s),
    .v_bar(vb_s), .h_bar_nxt(hb_s), .bl_reg(bl_s), .sl_reg(sl_s));

  // default size
  localparam int NV = 800, NH = 800, CW = $clog2(NH + 1);
  logic rst = 1, load = 0;
  logic [CW-1:0] col = 0;
  logic [NV-1:0] v, vb, bl, sl, ebl, esl;
  logic [NH-1:0] h, hb;
  update_unit dut (.clk, .rst, .load, .col, .v, .h, .v_bar(vb), .h_bar_nxt(hb),
                   .bl_reg(bl), .sl_reg(sl));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    v = '0; vb = '0; h = '0; hb = '0;
    @(negedge clk); rst_s = 0; rst = 0;
    @(negedge clk);
    chk(bl_s == 0 && sl_s == 0, "idle registers zero");
    load_s = 1; col_s = 0;
    @(negedge clk);
    chk(bl_s == 4'h5, $sformatf("col0 BL=%h", bl_s));
    chk(sl_s == 4'h0, $sformatf("col0 SL=%h", sl_s));
    col_s = 1;
    @(negedge clk);
    chk(bl_s == 4'h0, $sformatf("col1 BL=%h", bl_s));
    chk(sl_s == 4'h4, $sformatf("col1 SL=%h", sl_s));
    load_s = 0;
    @(negedge clk);
    chk(bl_s == 0 && sl_s == 0, "cleared after update");

    repeat (200) begin
      for (int k = 0; k < 25; k++) begin
        v[k*32 +: 32] = $urandom; vb[k*32 +: 32] = $urandom;
        h[k*32 +: 32] = $urandom; hb[k*32 +: 32] = $urandom;
      end
      col = CW'($urandom_range(0, NH - 1));
      load = ($urandom % 4) != 0;
      for (int i = 0; i < NV; i++) begin
        ebl[i] = load && v[i] && h[col];
        esl[i] = load && vb[i] && hb[col];
      end
      @(negedge clk);
      chk(bl == ebl, $sformatf("BL col %0d", col));
      chk(sl == esl, $sformatf("SL col %0d", col));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
