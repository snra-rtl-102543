// tb_cd_controller: end-to-end check of the CD control circuitry without an
// array. Part 1 replays the paper's 4x2 example: input v=4'b0101 with hidden
// sample 2'b01, then visible sample 4'b0100 in feed-back and hidden sample
// 2'b10 in reconstruct; every cycle's word lines, bit/source-line levels and
// registers are compared with the values printed for that example (WWL
// 0,1,2; RWL 3,0; BL 4'h5,4'h0; SL 4'h0,4'h4) and the iteration must take
// five clocks. Part 2 runs random iterations at the default 800 x 800 size
// with random hn, predicting BL/SL per column from the samples it fed in.
module tb_cd_controller;
  import snra_pkg::*;
  logic clk = 0;
  int checks = 0, failures = 0;
  always #1ns clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- 4x2 instance
  logic rst_s = 1, train_s = 0;
  logic [1:0] hn_s = 2;
  logic [3:0] vin_s = 0, vsen_s = 0, v_s, vb_s, blr_s, slr_s;
  logic [1:0] hsen_s = 0, h_s, wwl_s, rwl_s, cnt_s;
  logic de_s, oe_s, done_s;
  line_drive_t bl_s [4];
  line_drive_t sl_s [4];
  cd_state_t st_s;
  cd_controller #(.NV(4), .NH(2)) dut_s (
    .clk, .rst(rst_s), .train(train_s), .hn(hn_s), .vis_in(vin_s), .vis_sense(vsen_s),
    .hid_sense(hsen_s), .drive_en(de_s), .v(v_s), .h(h_s), .v_bar(vb_s),
    .wwl(wwl_s), .rwl(rwl_s), .wl_oe(oe_s), .bl_drv(bl_s), .sl_drv(sl_s),
    .state(st_s), .cnt(cnt_s), .upd_done(done_s), .bl_reg(blr_s), .sl_reg(slr_s));

  function automatic logic [3:0] lvl_vec(line_drive_t d [4], line_drive_t want);
    logic [3:0] r;
    for (int i = 0; i < 4; i++) r[i] = (d[i] == want);
    return r;
  endfunction

  // ---------------- default-size instance
  localparam int NV = 800, NH = 800, CW = $clog2(NH + 1);
  logic rst = 1, train = 0;
  logic [CW-1:0] hn = 1, cnt;
  logic [NV-1:0] vin, vsen, v, vb, blr, slr;
  logic [NH-1:0] hsen, h, wwl, rwl;
  logic de, oe, done;
  line_drive_t bl [NV];
  line_drive_t sl [NV];
  cd_state_t st;
  cd_controller dut (
    .clk, .rst, .train, .hn, .vis_in(vin), .vis_sense(vsen), .hid_sense(hsen),
    .drive_en(de), .v, .h, .v_bar(vb), .wwl, .rwl, .wl_oe(oe), .bl_drv(bl), .sl_drv(sl),
    .state(st), .cnt, .upd_done(done), .bl_reg(blr), .sl_reg(slr));

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    logic [NV-1:0] ev, evb;
    logic [NH-1:0] eh, ehb;
    vin = '0; vsen = '0; hsen = '0;
    // ---------------- part 1
    @(negedge clk); @(negedge clk);
    chk(!oe_s && !de_s && lvl_vec(bl_s, LINE_HIZ) == 4'hf, "initialization: all floating");
    rst_s = 0; rst = 0;
    @(negedge clk);
    chk(oe_s && wwl_s == 2'h0 && rwl_s == 2'h3 && st_s == ST_FEED_FORWARD, "FF lines");
    chk(lvl_vec(bl_s, LINE_HIZ) == 4'hf && lvl_vec(sl_s, LINE_HIZ) == 4'hf, "FF BL/SL Hi-Z");
    vin_s = 4'b0101; hsen_s = 2'b01; train_s = 1;
    @(negedge clk); train_s = 0; vin_s = 4'b1111; hsen_s = 2'b11;
    chk(st_s == ST_FEED_BACK && v_s == 4'b0101 && h_s == 2'b01, "FB: v, h stored");
    chk(wwl_s == 2'h0 && rwl_s == 2'h3, "FB word lines");
    vsen_s = 4'b0100;
    @(negedge clk); vsen_s = 4'b1111;
    chk(st_s == ST_RECONSTRUCT && vb_s == 4'b0100, "RC: v_bar stored");
    chk(wwl_s == 2'h0 && rwl_s == 2'h3 && lvl_vec(bl_s, LINE_HIZ) == 4'hf, "RC lines");
    hsen_s = 2'b10;
    @(negedge clk); hsen_s = 2'b00;
    chk(st_s == ST_UPDATE && cnt_s == 0, "update column 0");
    chk(wwl_s == 2'h1 && rwl_s == 2'h0, "WWL=2'h1 RWL=2'h0");
    chk(blr_s == 4'h5 && slr_s == 4'h0, $sformatf("BL=%h SL=%h", blr_s, slr_s));
    chk(lvl_vec(bl_s, LINE_VTRAIN) == 4'h5 && lvl_vec(bl_s, LINE_GND) == 4'ha, "BL levels col0");
    chk(lvl_vec(sl_s, LINE_GND) == 4'hf, "SL levels col0");
    @(negedge clk);
    chk(st_s == ST_UPDATE && cnt_s == 1 && done_s, "update column 1");
    chk(wwl_s == 2'h2 && rwl_s == 2'h0, "WWL=2'h2");
    chk(blr_s == 4'h0 && slr_s == 4'h4, $sformatf("BL=%h SL=%h", blr_s, slr_s));
    chk(lvl_vec(sl_s, LINE_VTRAIN) == 4'h4 && lvl_vec(bl_s, LINE_GND) == 4'hf, "levels col1");
    @(negedge clk);
    chk(st_s == ST_FEED_FORWARD && rwl_s == 2'h3 && wwl_s == 0, "back to FF after 5 clocks");
    chk(lvl_vec(bl_s, LINE_HIZ) == 4'hf, "BL floating again");

    // ---------------- part 2
    repeat (12) begin
      hn = CW'($urandom_range(1, 30));
      if ($urandom % 6 == 0) hn = CW'(NH);
      for (int k = 0; k < 25; k++) begin vin[k*32 +: 32] = $urandom; hsen[k*32 +: 32] = $urandom; end
      ev = vin; eh = hsen;
      train = 1;
      @(negedge clk); train = 0; cyc = 1;
      for (int k = 0; k < 25; k++) begin vsen[k*32 +: 32] = $urandom; hsen[k*32 +: 32] = $urandom; end
      evb = vsen;
      chk(hn == 0 || (v == ev && h == eh), "v,h");
      @(negedge clk); cyc++;
      ehb = hsen;
      chk(vb == evb, "v_bar");
      for (int c = 0; c < int'(hn); c++) begin
        @(negedge clk); cyc++;
        for (int k = 0; k < 25; k++) hsen[k*32 +: 32] = $urandom;
        chk(st == ST_UPDATE && wwl == (NH'(1) << c) && rwl == 0, $sformatf("col %0d lines", c));
        chk(blr == (ev & {NV{eh[c]}}) && slr == (evb & {NV{ehb[c]}}), $sformatf("col %0d BL/SL", c));
      end
      @(negedge clk); cyc++;
      chk(st == ST_FEED_FORWARD, "iteration ends");
      chk(cyc == int'(hn) + 3, $sformatf("hn+3 clocks (%0d)", cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
