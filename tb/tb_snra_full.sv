// tb_snra_full: the SNRA at its default size, a 784x800x800x10 deep belief
// network, taken through one test evaluation of the whole network and one
// complete CD training iteration of the first RBM (784x800, hn = 800). The
// iteration must take 803 clocks; every one of the 627,200 weights of RBM0
// must move as Eq. (4) predicts from the samples the testbench read on the
// array side, and the other RBMs must not change.
module tb_snra_full;
  import snra_pkg::*;
  localparam int N0 = 784, N1 = 800, N2 = 800, N3 = 10, NL = 32;
  localparam int NHM = 800, CW = $clog2(NHM + 1), L = 17;

  logic clk = 0, rst = 1, train = 0;
  logic [1:0] cfg_nlayers = 3, cfg_train_layer = 0;
  logic [2:0][CW-1:0] cfg_hn;
  logic [N0-1:0] data_in;
  logic [NHM-1:0] dbn_out;
  cd_state_t state;
  logic [CW-1:0] cnt;
  logic upd_done;
  logic lut_cfg_we = 0, lut_cfg_bit = 0;
  logic [4:0] lut_cfg_sel = 0;
  logic [6:0] lut_cfg_addr = 0;
  logic [NL-1:0][5:0] lut_in = '0;
  logic [NL-1:0] lut_o6, lut_o5, lut_pwr_en;

  snra_top dut (.*);

  always #1ns clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [7:0] w0 [N0][N1];
  logic [7:0] w1 [N1][N2];
  logic [N0-1:0] v, vb;
  logic [N1-1:0] h, hb;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, bad;
    cfg_hn[0] = CW'(N1); cfg_hn[1] = CW'(N2); cfg_hn[2] = CW'(N3);
    for (int k = 0; k < N0; k += 32) data_in[k +: 32] = $urandom;
    @(negedge clk); @(negedge clk);
    rst = 0;
    @(negedge clk);
    // test: whole DBN in one cycle
    #0.2ns;
    chk(state == ST_FEED_FORWARD && dbn_out == NHM'(dut.hu2), "test output from RBM2");
    chk(dut.u_isl1.vis_drive == dut.hu0 && dut.u_isl2.vis_drive == dut.hu1, "routing chain");
    chk(lut_pwr_en == 32'h0000_0007, "training LUT pairs gated in test");
    // one training iteration of RBM0
    for (int i = 0; i < N0; i++)
      for (int j = 0; j < N1; j++) w0[i][j] = dut.u_isl0.u_rbm.dw_pos[i][j];
    for (int i = 0; i < N1; i++)
      for (int j = 0; j < N2; j++) w1[i][j] = dut.u_isl1.u_rbm.dw_pos[i][j];
    @(negedge clk);
    train = 1;
    #0.2ns;
    v = dut.u_isl0.vis_in_used[N0-1:0]; h = dut.hu0;
    chk(v == data_in, "v is the input vector");
    chk(lut_pwr_en == '1, "all LUT pairs powered while training");
    @(negedge clk); train = 0; cyc = 1;
    vb = dut.u_isl0.vis_used[N0-1:0];
    @(negedge clk); cyc++;
    hb = dut.hu0;
    while (state != ST_FEED_FORWARD) begin @(negedge clk); cyc++; end
    chk(cyc == N1 + 3, $sformatf("training iteration took %0d clocks, expected %0d", cyc, N1 + 3));
    bad = 0;
    for (int i = 0; i < N0; i++)
      for (int j = 0; j < N1; j++) begin
        int e;
        e = int'(w0[i][j]) + int'(v[i] & h[j]) - int'(vb[i] & hb[j]);
        if (e < 0) e = 0;
        if (e > L - 1) e = L - 1;
        if (int'(dut.u_isl0.u_rbm.dw_pos[i][j]) != e) bad++;
      end
    chk(bad == 0, $sformatf("%0d RBM0 weights differ from Eq. (4)", bad));
    bad = 0;
    for (int i = 0; i < N1; i++)
      for (int j = 0; j < N2; j++) if (dut.u_isl1.u_rbm.dw_pos[i][j] != w1[i][j]) bad++;
    chk(bad == 0, "RBM1 untouched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
