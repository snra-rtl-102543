// tb_snra_workloads: runs each evaluated DBN topology on the default-size
// SNRA (784x800x800x10 fabric): 784x10, 784x500x10, 784x800x10,
// 784x500x500x10 and 784x800x800x10. For each topology it sets cfg_nlayers
// and cfg_hn, checks a test evaluation (output taken from the last RBM in
// use, unused neurons masked to 0), and trains every RBM of the topology
// once, bottom-up, with a random 784-bit input vector standing in for an
// image. Each iteration must take hn+3 clocks and every weight of the
// trained RBM must follow Eq. (4); the weights of the other RBMs must stay.
module tb_snra_workloads;
  import snra_pkg::*;
  localparam int N0 = 784, N1 = 800, N2 = 800, N3 = 10, NL = 32;
  localparam int NHM = 800, CW = $clog2(NHM + 1), L = 17;
  localparam int NVK [3] = '{N0, N1, N2};
  localparam int NHK [3] = '{N1, N2, N3};

  logic clk = 0, rst = 1, train = 0;
  logic [1:0] cfg_nlayers = 1, cfg_train_layer = 0;
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

  function automatic int get_w(int k, int i, int j);
    case (k)
      0: return int'(dut.u_isl0.u_rbm.dw_pos[i][j]);
      1: return int'(dut.u_isl1.u_rbm.dw_pos[i][j]);
      default: return int'(dut.u_isl2.u_rbm.dw_pos[i][j]);
    endcase
  endfunction
  function automatic logic [799:0] vis_in_of(int k);
    case (k)
      0: return dut.u_isl0.vis_in_used;
      1: return dut.u_isl1.vis_in_used;
      default: return dut.u_isl2.vis_in_used;
    endcase
  endfunction
  function automatic logic [799:0] vis_of(int k);
    case (k)
      0: return dut.u_isl0.vis_used;
      1: return dut.u_isl1.vis_used;
      default: return dut.u_isl2.vis_used;
    endcase
  endfunction
  function automatic logic [799:0] hid_of(int k);
    case (k)
      0: return NHM'(dut.hu0);
      1: return NHM'(dut.hu1);
      default: return NHM'(dut.hu2);
    endcase
  endfunction

  logic [7:0] snap [3][800][800];

  task automatic take_snap();
    for (int k = 0; k < 3; k++)
      for (int i = 0; i < NVK[k]; i++)
        for (int j = 0; j < NHK[k]; j++) snap[k][i][j] = 8'(get_w(k, i, j));
  endtask

  task automatic rand_input();
    for (int k = 0; k < N0; k += 32) data_in[k +: 32] = $urandom;
  endtask

  task automatic cd_iter(int k, string name);
    logic [799:0] v, vb, h, hb;
    int cyc, hn, bad;
    cfg_train_layer = 2'(k);
    hn = int'(cfg_hn[k]);
    rand_input();
    take_snap();
    @(negedge clk);
    train = 1;
    #0.2ns;
    v = vis_in_of(k); h = hid_of(k);
    @(negedge clk); train = 0; cyc = 1;
    vb = vis_of(k);
    @(negedge clk); cyc++;
    hb = hid_of(k);
    while (state != ST_FEED_FORWARD && cyc < 1000) begin @(negedge clk); cyc++; end
    chk(cyc == hn + 3, $sformatf("%s RBM%0d: %0d clocks, expected %0d", name, k, cyc, hn + 3));
    bad = 0;
    for (int kk = 0; kk < 3; kk++)
      for (int i = 0; i < NVK[kk]; i++)
        for (int j = 0; j < NHK[kk]; j++) begin
          int e;
          e = int'(snap[kk][i][j]);
          if (kk == k) e += int'(v[i] & h[j]) - int'(vb[i] & hb[j]);
          if (e < 0) e = 0;
          if (e > L - 1) e = L - 1;
          if (get_w(kk, i, j) != e) bad++;
        end
    chk(bad == 0, $sformatf("%s RBM%0d: %0d weights differ from Eq. (4)", name, k, bad));
  endtask

  task automatic run_topology(string name, int nl, int h0, int h1, int h2);
    cfg_nlayers = 2'(nl);
    cfg_hn[0] = CW'(h0); cfg_hn[1] = CW'(h1); cfg_hn[2] = CW'(h2);
    rand_input();
    @(negedge clk);
    #0.2ns;
    chk(dbn_out == hid_of(nl - 1), {name, ": output from last RBM"});
    chk((dbn_out >> (nl == 1 ? h0 : (nl == 2 ? h1 : h2))) == 0, {name, ": unused outputs masked"});
    for (int k = 0; k < nl; k++) cd_iter(k, name);
    $display("%s: trained %0d RBM(s)", name, nl);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_hn = '0;
    data_in = '0;
    @(negedge clk); @(negedge clk);
    rst = 0;
    run_topology("784x10",         1,  10,   0,  0);
    run_topology("784x500x10",     2, 500,  10,  0);
    run_topology("784x800x10",     2, 800,  10,  0);
    run_topology("784x500x500x10", 3, 500, 500, 10);
    run_topology("784x800x800x10", 3, 800, 800, 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
