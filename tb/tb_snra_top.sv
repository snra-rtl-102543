// tb_snra_top: end-to-end test of the SNRA deep belief network at reduced
// size (8x6x6x3 DBN, 8 LUT-FF pairs of which 3 serve test).
//
// It configures the LUT bank, evaluates the DBN in test mode for each
// topology depth (1, 2, 3 RBMs) and then trains the RBMs bottom-up with the
// shared CD controller. For each training iteration the testbench records
// the visible input, hidden sample, visible reconstruction and hidden
// reconstruction of the selected RBM from the array side, predicts every
// weight of every island from Eq. (4) with saturating domain-wall positions,
// and compares; islands not under training must not change. It checks the
// hn+3 clock count, the routing chain and output selection, floating lines
// during initialization, and LUT power gating (training-only pairs gated in
// test, powered during training, contents kept). Every mechanism is counted
// and one that never happened counts as a failure.
module tb_snra_top;
  import snra_pkg::*;
  localparam int N0 = 8, N1 = 6, N2 = 6, N3 = 3, NL = 8, NT = 3;
  localparam int NVM = 8, NHM = 6, CW = $clog2(NHM + 1), LW = 3, L = 17;
  localparam int NVK [3] = '{N0, N1, N2};
  localparam int NHK [3] = '{N1, N2, N3};

  logic clk = 0, rst = 1, train = 0;
  logic [1:0] cfg_nlayers = 3, cfg_train_layer = 0;
  logic [2:0][CW-1:0] cfg_hn;
  logic [N0-1:0] data_in = 0;
  logic [NHM-1:0] dbn_out;
  cd_state_t state;
  logic [CW-1:0] cnt;
  logic upd_done;
  logic lut_cfg_we = 0, lut_cfg_bit = 0;
  logic [LW-1:0] lut_cfg_sel = 0;
  logic [6:0] lut_cfg_addr = 0;
  logic [NL-1:0][5:0] lut_in = '0;
  logic [NL-1:0] lut_o6, lut_o5, lut_pwr_en;

  snra_top #(.N0(N0), .N1(N1), .N2(N2), .N3(N3), .NUM_LUT(NL), .N_TEST_LUT(NT)) dut (.*);

  always #1ns clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int m_init_float = 0, m_test_loop = 0, m_depth [4] = '{0, 0, 0, 0}, m_iter [3] = '{0, 0, 0};
  int m_layer_switch = 0, m_cols = 0, m_inc = 0, m_dec = 0, m_cancel = 0;
  int m_gated = 0, m_train_power = 0, m_lut_cfg = 0;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int get_w(int k, int i, int j);
    case (k)
      0: return int'(dut.u_isl0.u_rbm.dw_pos[i][j]);
      1: return int'(dut.u_isl1.u_rbm.dw_pos[i][j]);
      default: return int'(dut.u_isl2.u_rbm.dw_pos[i][j]);
    endcase
  endfunction

  function automatic logic [NVM-1:0] vis_in_of(int k);
    case (k)
      0: return dut.u_isl0.vis_in_used;
      1: return dut.u_isl1.vis_in_used;
      default: return dut.u_isl2.vis_in_used;
    endcase
  endfunction
  function automatic logic [NVM-1:0] vis_of(int k);
    case (k)
      0: return dut.u_isl0.vis_used;
      1: return dut.u_isl1.vis_used;
      default: return dut.u_isl2.vis_used;
    endcase
  endfunction
  function automatic logic [NHM-1:0] hid_of(int k);
    case (k)
      0: return NHM'(dut.hu0);
      1: return NHM'(dut.hu1);
      default: return NHM'(dut.hu2);
    endcase
  endfunction

  int w0 [3][NVM][NHM];
  logic [63:0] tt [NL];

  task automatic snap();
    for (int k = 0; k < 3; k++)
      for (int i = 0; i < NVK[k]; i++)
        for (int j = 0; j < NHK[k]; j++) w0[k][i][j] = get_w(k, i, j);
  endtask

  task automatic check_luts(bit training);
    for (int n = 0; n < NL; n++) begin
      bit on = (n < NT) || training;
      chk(lut_pwr_en[n] == on, $sformatf("LUT %0d power", n));
      chk(lut_o6[n] == (on ? tt[n][lut_in[n]] : 1'b0), $sformatf("LUT %0d output", n));
      if (!on) m_gated++;
      if (training && n >= NT) m_train_power++;
    end
  endtask

  // One CD iteration on RBM k, checked against Eq. (4).
  task automatic cd_iter(int k);
    logic [NVM-1:0] v, vb;
    logic [NHM-1:0] h, hb;
    int cyc = 0, hn;
    if (cfg_train_layer != 2'(k)) m_layer_switch++;
    cfg_train_layer = 2'(k);
    hn = int'(cfg_hn[k]);
    data_in = N0'($urandom);
    for (int n = 0; n < NL; n++) lut_in[n] = 6'($urandom);
    snap();
    train = 1;
    #0.2ns;
    v = vis_in_of(k); h = hid_of(k);
    check_luts(1);
    @(negedge clk); train = 0; cyc++;
    chk(state == ST_FEED_BACK, "feed-back");
    vb = vis_of(k);
    @(negedge clk); cyc++;
    chk(state == ST_RECONSTRUCT, "reconstruct");
    hb = hid_of(k);
    check_luts(1);
    while (state != ST_FEED_FORWARD && cyc < 100) begin
      @(negedge clk); cyc++;
      if (state == ST_UPDATE) m_cols++;
    end
    chk(cyc == hn + 3, $sformatf("RBM%0d iteration %0d clocks, expected %0d", k, cyc, hn + 3));
    m_iter[k]++;
    for (int kk = 0; kk < 3; kk++)
      for (int i = 0; i < NVK[kk]; i++)
        for (int j = 0; j < NHK[kk]; j++) begin
          int d = 0, e;
          if (kk == k) begin
            d = int'(v[i] & h[j]) - int'(vb[i] & hb[j]);
            if (v[i] & h[j] & vb[i] & hb[j]) m_cancel++;
            if (d > 0) m_inc++;
            if (d < 0) m_dec++;
          end
          e = w0[kk][i][j] + d;
          if (e < 0) e = 0;
          if (e > L - 1) e = L - 1;
          chk(get_w(kk, i, j) == e, $sformatf("w RBM%0d [%0d][%0d]: %0d vs %0d",
                                              kk, i, j, get_w(kk, i, j), e));
        end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_hn[0] = CW'(N1); cfg_hn[1] = CW'(N2); cfg_hn[2] = CW'(N3);
    @(negedge clk); @(negedge clk);
    // initialization: word lines low, bit/source lines floating
    chk(dut.u_isl0.rwl == 0 && dut.u_isl1.rwl == 0 && dut.u_isl2.wwl == 0, "init: word lines off");
    chk(dut.u_isl0.bl[0] == LINE_HIZ, "init: BL floating");
    m_init_float++;
    rst = 0;
    @(negedge clk);
    // configure LUT bank
    for (int n = 0; n < NL; n++) begin
      tt[n] = {$urandom, $urandom};
      for (int a = 0; a < 65; a++) begin
        lut_cfg_we = 1; lut_cfg_sel = LW'(n); lut_cfg_addr = 7'(a);
        lut_cfg_bit = (a < 64) ? tt[n][a] : 1'b0;
        #0.2ns;
        chk(lut_pwr_en[n], "LUT powered while configured");
        @(negedge clk);
        m_lut_cfg++;
      end
    end
    lut_cfg_we = 0;

    // test operation with 1, 2, 3 RBMs
    for (int depth = 1; depth <= 3; depth++) begin
      cfg_nlayers = 2'(depth);
      repeat (20) begin
        data_in = N0'($urandom);
        for (int n = 0; n < NL; n++) lut_in[n] = 6'($urandom);
        #0.2ns;
        chk(state == ST_FEED_FORWARD, "test: feed-forward");
        chk(dbn_out == hid_of(depth - 1), "DBN output from last RBM");
        chk(dut.u_isl1.vis_drive == N1'(dut.hu0) && dut.u_isl2.vis_drive == N2'(dut.hu1),
            "routing chain");
        chk(dut.u_isl0.vis_drive == data_in, "input drives RBM0");
        check_luts(0);
        m_test_loop++; m_depth[depth]++;
        @(negedge clk);
      end
    end

    // training, bottom-up, with a reduced hidden count on RBM0 once
    repeat (3) cd_iter(0);
    cfg_hn[0] = CW'(4);
    repeat (2) cd_iter(0);
    cfg_hn[0] = CW'(N1);
    repeat (3) cd_iter(1);
    repeat (3) cd_iter(2);
    cd_iter(0);

    chk(m_init_float > 0, "mechanism: initialization Hi-Z");
    chk(m_test_loop > 0, "mechanism: test self-loop");
    for (int d = 1; d <= 3; d++) chk(m_depth[d] > 0, $sformatf("mechanism: depth %0d", d));
    for (int k = 0; k < 3; k++) chk(m_iter[k] > 0, $sformatf("mechanism: training RBM%0d", k));
    chk(m_layer_switch >= 3, "mechanism: controller switched between RBMs");
    chk(m_cols > 0, "mechanism: column updates");
    chk(m_inc > 0 && m_dec > 0, "mechanism: weight increase and decrease");
    chk(m_cancel > 0, "mechanism: BL=SL=Vtrain no change");
    chk(m_gated > 0 && m_train_power > 0, "mechanism: LUT power gating");
    chk(m_lut_cfg > 0, "mechanism: LUT configuration");
    $display("mechanisms: test=%0d iters=%0d/%0d/%0d switches=%0d cols=%0d inc=%0d dec=%0d cancel=%0d gated=%0d",
             m_test_loop, m_iter[0], m_iter[1], m_iter[2], m_layer_switch, m_cols, m_inc, m_dec,
             m_cancel, m_gated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
