// tb_io_buffer: checks which value drives the visible and hidden lines in
// each CD phase (input in feed-forward, h in feed-back, v_bar in
// reconstruct, nothing in update or while drive_en is low), at the default
// 800 x 800 size with random data.
module tb_io_buffer;
  import snra_pkg::*;
  localparam int NV = 800, NH = 800;
  cd_state_t state;
  logic drive_en, vis_drive_en, hid_drive_en;
  logic [NV-1:0] vis_in, v_bar, vis_drive;
  logic [NH-1:0] h, hid_drive;
  int checks = 0, failures = 0;

  io_buffer dut (.*);

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
    repeat (200) begin
      for (int k = 0; k < 25; k++) begin
        vis_in[k*32 +: 32] = $urandom; v_bar[k*32 +: 32] = $urandom; h[k*32 +: 32] = $urandom;
      end
      state = cd_state_t'($urandom_range(0, 3));
      drive_en = ($urandom % 5) != 0;
      #1ns;
      if (!drive_en || state == ST_UPDATE) begin
        chk(!vis_drive_en && !hid_drive_en && vis_drive == 0 && hid_drive == 0, "nothing driven");
      end else if (state == ST_FEED_FORWARD) begin
        chk(vis_drive_en && !hid_drive_en && vis_drive == vis_in, "FF drives input");
      end else if (state == ST_FEED_BACK) begin
        chk(!vis_drive_en && hid_drive_en && hid_drive == h, "FB drives h");
      end else begin
        chk(vis_drive_en && !hid_drive_en && vis_drive == v_bar, "RC drives v_bar");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
