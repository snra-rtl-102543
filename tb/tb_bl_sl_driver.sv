// tb_bl_sl_driver: checks the bit/source-line levels against the signalling
// table at the default 800 rows: floating outside update; in update Vtrain
// where the register bit is 1 and ground where it is 0, independently on BL
// and SL (so increase, decrease and no-change rows all occur).
module tb_bl_sl_driver;
  import snra_pkg::*;
  localparam int NV = 800;
  logic upd;
  logic [NV-1:0] bl_reg, sl_reg;
  line_drive_t bl_drv [NV];
  line_drive_t sl_drv [NV];
  int checks = 0, failures = 0, n_inc = 0, n_dec = 0;

  bl_sl_driver dut (.*);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100) begin
      upd = ($urandom % 3) != 0;
      for (int k = 0; k < 25; k++) begin
        bl_reg[k*32 +: 32] = $urandom; sl_reg[k*32 +: 32] = $urandom;
      end
      #1ns;
      for (int i = 0; i < NV; i++) begin
        line_drive_t eb, es;
        eb = !upd ? LINE_HIZ : (bl_reg[i] ? LINE_VTRAIN : LINE_GND);
        es = !upd ? LINE_HIZ : (sl_reg[i] ? LINE_VTRAIN : LINE_GND);
        if (bl_drv[i] != eb || sl_drv[i] != es) begin
          chk(0, $sformatf("row %0d", i)); break;
        end
        if (eb == LINE_VTRAIN && es == LINE_GND) n_inc++;
        if (eb == LINE_GND && es == LINE_VTRAIN) n_dec++;
      end
      chk(1, "vector");
    end
    chk(n_inc > 0 && n_dec > 0, "increase and decrease rows seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
