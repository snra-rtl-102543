// tb_cd_fsm: self-checking testbench of the four-state CD FSM.
// A reference sequence built in the testbench (FF -> FB -> RC -> hn x UPDATE
// -> FF) is compared with the FSM every cycle for the paper's 4x2 case
// (hn = 2, five clocks), random hn up to the default 800 columns, hn = 0
// and the test (no train) self-loop. Also checks the capture strobes, the
// next-state outputs, the hn+3 cycle count and that the lines float during
// reset.
module tb_cd_fsm;
  import snra_pkg::*;
  localparam int MAX_H = 800;
  localparam int CW = $clog2(MAX_H + 1);

  logic clk = 0, rst = 1, train = 0;
  logic [CW-1:0] hn = 2;
  cd_state_t state, nxt_state;
  logic [CW-1:0] cnt, nxt_cnt;
  logic cap_vh, cap_vbar, cap_hbar, upd_done, drive_en;
  int checks = 0, failures = 0;

  cd_fsm #(.MAX_H(MAX_H)) dut (.*);

  always #1ns clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One training iteration with hn columns; returns cycles spent.
  task automatic run_iter(int n);
    int cols = (n == 0) ? 1 : n;
    int cycles = 0;
    hn = CW'(n);
    @(negedge clk);
    chk(state == ST_FEED_FORWARD, "idle in feed-forward");
    train = 1;
    #0.1ns;
    chk(cap_vh && nxt_state == ST_FEED_BACK, "train: cap_vh, next FB");
    @(negedge clk); train = 0; cycles++;
    chk(state == ST_FEED_BACK && cap_vbar && !cap_vh, "feed-back state");
    chk(nxt_state == ST_RECONSTRUCT, "next RC");
    @(negedge clk); cycles++;
    chk(state == ST_RECONSTRUCT && cap_hbar, "reconstruct state");
    chk(nxt_state == ST_UPDATE && nxt_cnt == 0, "next update col 0");
    for (int c = 0; c < cols; c++) begin
      @(negedge clk); cycles++;
      chk(state == ST_UPDATE && cnt == CW'(c), $sformatf("update col %0d", c));
      chk(upd_done == (c == cols - 1), "upd_done on last column");
      if (c < cols - 1) chk(nxt_cnt == CW'(c + 1), "next column");
      else chk(nxt_state == ST_FEED_FORWARD, "next FF after last column");
    end
    @(negedge clk); cycles++;
    chk(state == ST_FEED_FORWARD, "back in feed-forward");
    // cycles counted from the FF cycle in which train was seen
    chk(cycles == cols + 3, $sformatf("N+3 cycles: %0d vs %0d", cycles, cols + 3));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    chk(state == ST_FEED_FORWARD && !drive_en, "reset: FF, lines floating");
    chk(!cap_vh && !cap_vbar && !cap_hbar, "no captures in reset");
    rst = 0;
    @(negedge clk);
    chk(drive_en, "lines driven after reset");
    // test operation: self-loop
    repeat (5) begin
      @(negedge clk);
      chk(state == ST_FEED_FORWARD && !cap_vh, "test self-loop");
    end
    run_iter(2);
    run_iter(1);
    run_iter(0);
    run_iter(MAX_H);
    repeat (10) run_iter(int'($urandom_range(1, 40)));
    // reset in the middle of an iteration
    @(negedge clk); train = 1; @(negedge clk); train = 0; @(negedge clk);
    rst = 1; @(negedge clk); rst = 0;
    chk(state == ST_FEED_FORWARD && cnt == 0, "reset aborts iteration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
