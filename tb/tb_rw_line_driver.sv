// tb_rw_line_driver: checks the word-line decoding against the signalling
// table: the paper's 4x2 waveform values (WWL 2'h0 / 2'h1 / 2'h2, RWL 2'h3 /
// 2'h0) and, at the default 800 columns, every state with random counter and
// hn against a per-column reference. Lines must be low while drive_en is 0.
module tb_rw_line_driver;
  import snra_pkg::*;
  int checks = 0, failures = 0;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  cd_state_t st_s;
  logic [1:0] cnt_s, hn_s, wwl_s, rwl_s;
  logic de_s, oe_s;
  rw_line_driver #(.NH(2)) dut_s (.state(st_s), .cnt(cnt_s), .hn(hn_s), .drive_en(de_s),
                                  .wwl(wwl_s), .rwl(rwl_s), .wl_oe(oe_s));

  localparam int NH = 800, CW = $clog2(NH + 1);
  cd_state_t st;
  logic [CW-1:0] cnt, hn;
  logic [NH-1:0] wwl, rwl;
  logic de, oe;
  rw_line_driver dut (.state(st), .cnt, .hn, .drive_en(de), .wwl, .rwl, .wl_oe(oe));

  initial begin
    #100us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hn_s = 2; de_s = 0; st_s = ST_FEED_FORWARD; cnt_s = 0; #1ns;
    chk(!oe_s && wwl_s == 0 && rwl_s == 0, "initialization floating");
    de_s = 1;
    st_s = ST_FEED_FORWARD; #1ns; chk(oe_s && wwl_s == 2'h0 && rwl_s == 2'h3, "FF");
    st_s = ST_FEED_BACK;    #1ns; chk(wwl_s == 2'h0 && rwl_s == 2'h3, "FB");
    st_s = ST_RECONSTRUCT;  #1ns; chk(wwl_s == 2'h0 && rwl_s == 2'h3, "RC");
    st_s = ST_UPDATE; cnt_s = 0; #1ns; chk(wwl_s == 2'h1 && rwl_s == 2'h0, "UPD c0");
    cnt_s = 1; #1ns; chk(wwl_s == 2'h2 && rwl_s == 2'h0, "UPD c1");

    repeat (400) begin
      st  = cd_state_t'($urandom_range(0, 3));
      cnt = CW'($urandom_range(0, NH - 1));
      hn  = CW'($urandom_range(0, NH));
      de  = ($urandom % 5) != 0;
      #1ns;
      for (int j = 0; j < NH; j++) begin
        if (wwl[j] != (de && st == ST_UPDATE && j == int'(cnt))) begin
          chk(0, $sformatf("wwl[%0d]", j)); break;
        end
        if (rwl[j] != (de && st != ST_UPDATE && j < int'(hn))) begin
          chk(0, $sformatf("rwl[%0d]", j)); break;
        end
      end
      chk(oe == de, "wl_oe");
      chk($countones(wwl) <= 1, "at most one column written");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
