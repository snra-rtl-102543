// tb_rbm_array: checks the behavioural RBM island on a 4x2 array.
// Write path: with WWL[0] high and BL=Vtrain/SL=GND on rows 0 and 2 the
// domain walls of w00 and w20 move up by DW_STEP, BL=GND/SL=Vtrain moves one
// down, equal levels and unselected columns do not move, and the positions
// saturate at 0 and DW_LEVELS-1. Read path: the hidden input currents equal
// sum_i v_i * w_ij over columns with RWL high (0 where RWL is low), the
// visible currents sum_j h_j * w_ij, and with a strongly positive or
// negative weight the hidden p-bit output is (almost) always 1 or 0.
module tb_rbm_array;
  import snra_pkg::*;
  localparam int NV = 4, NH = 2, L = 17, MID = 8;
  logic clk = 0;
  logic [NV-1:0] vis_drive = 0, vis_out;
  logic [NH-1:0] hid_drive = 0, wwl = 0, rwl = 0, hid_out;
  logic vis_drive_en = 0, hid_drive_en = 0;
  line_drive_t bl_drv [NV];
  line_drive_t sl_drv [NV];
  int checks = 0, failures = 0;
  int ew [NV][NH];

  rbm_array #(.NV(NV), .NH(NH), .DW_LEVELS(L), .DW_STEP(1)) dut (.*);
  always #1ns clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic check_weights(string msg);
    bit ok = 1;
    for (int i = 0; i < NV; i++)
      for (int j = 0; j < NH; j++)
        if (int'(dut.dw_pos[i][j]) != ew[i][j]) ok = 0;
    chk(ok, msg);
  endtask

  // One write cycle on column col with the given per-row levels; the
  // testbench's own model of Table I predicts the new positions.
  task automatic write_col(int col, line_drive_t b [NV], line_drive_t s [NV]);
    @(negedge clk);
    wwl = NH'(1) << col;
    for (int i = 0; i < NV; i++) begin
      bl_drv[i] = b[i]; sl_drv[i] = s[i];
      if (b[i] == LINE_VTRAIN && s[i] == LINE_GND && ew[i][col] < L - 1) ew[i][col]++;
      if (b[i] == LINE_GND && s[i] == LINE_VTRAIN && ew[i][col] > 0) ew[i][col]--;
    end
    @(negedge clk);
    wwl = 0;
    for (int i = 0; i < NV; i++) begin bl_drv[i] = LINE_HIZ; sl_drv[i] = LINE_HIZ; end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    line_drive_t b [NV], s [NV];
    for (int i = 0; i < NV; i++) begin bl_drv[i] = LINE_HIZ; sl_drv[i] = LINE_HIZ; end
    for (int i = 0; i < NV; i++) for (int j = 0; j < NH; j++) ew[i][j] = MID;
    #0.5ns;
    check_weights("initial mid positions");
    // paper example column 0: BL = 4'h5, SL = 0
    b = '{LINE_VTRAIN, LINE_GND, LINE_VTRAIN, LINE_GND};
    s = '{LINE_GND, LINE_GND, LINE_GND, LINE_GND};
    write_col(0, b, s);
    check_weights("w00, w20 increased");
    chk(int'(dut.dw_pos[0][0]) == MID + 1 && int'(dut.dw_pos[2][1]) == MID, "explicit w00/w21");
    // column 1: SL = 4'h4 -> w21 decreased
    b = '{LINE_GND, LINE_GND, LINE_GND, LINE_GND};
    s = '{LINE_GND, LINE_GND, LINE_VTRAIN, LINE_GND};
    write_col(1, b, s);
    check_weights("w21 decreased");
    chk(int'(dut.dw_pos[2][1]) == MID - 1, "explicit w21");
    // both Vtrain / Hi-Z: no change
    b = '{LINE_VTRAIN, LINE_HIZ, LINE_VTRAIN, LINE_GND};
    s = '{LINE_VTRAIN, LINE_HIZ, LINE_VTRAIN, LINE_GND};
    write_col(0, b, s);
    check_weights("equal levels leave weights");
    // saturation
    b = '{LINE_VTRAIN, LINE_GND, LINE_GND, LINE_GND};
    s = '{LINE_GND, LINE_VTRAIN, LINE_GND, LINE_GND};
    repeat (12) write_col(0, b, s);
    check_weights("saturation");
    chk(int'(dut.dw_pos[0][0]) == L - 1 && int'(dut.dw_pos[1][0]) == 0, "explicit saturation");
    // random writes
    repeat (40) begin
      int col;
      col = $urandom_range(0, NH - 1);
      for (int i = 0; i < NV; i++) begin
        b[i] = line_drive_t'($urandom_range(0, 2)); s[i] = line_drive_t'($urandom_range(0, 2));
      end
      write_col(col, b, s);
      check_weights("random write");
    end

    // read currents
    repeat (30) begin
      int eh [NH], evc [NV];
      @(negedge clk);
      vis_drive = NV'($urandom); rwl = NH'($urandom); hid_drive = NH'($urandom);
      vis_drive_en = 1; hid_drive_en = 0;
      #0.1ns;
      for (int j = 0; j < NH; j++) begin
        eh[j] = 0;
        if (rwl[j]) for (int i = 0; i < NV; i++) if (vis_drive[i]) eh[j] += ew[i][j] - MID;
        chk(dut.hid_i[j] == eh[j], $sformatf("hidden current %0d", j));
      end
      vis_drive_en = 0; hid_drive_en = 1;
      #0.1ns;
      for (int i = 0; i < NV; i++) begin
        evc[i] = 0;
        for (int j = 0; j < NH; j++) if (rwl[j] && hid_drive[j]) evc[i] += ew[i][j] - MID;
        chk(dut.vis_i[i] == evc[i], $sformatf("visible current %0d", i));
      end
    end

    // p-bit follows the current: saturate w00 at +8 and w10 at -8 again
    b = '{LINE_VTRAIN, LINE_GND, LINE_GND, LINE_GND};
    s = '{LINE_GND, LINE_VTRAIN, LINE_GND, LINE_GND};
    repeat (20) write_col(0, b, s);
    check_weights("re-saturated");
    begin
      int ones = 0;
      hid_drive_en = 0; vis_drive_en = 1; rwl = 2'b01;
      vis_drive = 4'b0001;
      repeat (200) begin @(negedge clk); ones += int'(hid_out[0]); end
      chk(ones > 190, $sformatf("positive weight -> mostly 1 (%0d)", ones));
      ones = 0; vis_drive = 4'b0010;
      repeat (200) begin @(negedge clk); ones += int'(hid_out[0]); end
      chk(ones < 10, $sformatf("negative weight -> mostly 0 (%0d)", ones));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
