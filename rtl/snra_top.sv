// snra_top: spintronic neuromorphic reconfigurable array (SNRA) configured
// as a deep belief network (DBN) with up to three stacked RBMs, trained in
// the circuit by contrastive divergence.
//
// Three probabilistic islands (rbm_array, behavioural) hold the RBMs
// N0 x N1, N1 x N2 and N2 x N3; the defaults are the largest topology the
// paper evaluates, 784x800x800x10. cfg_nlayers (1..3) chooses how many are in
// use and cfg_hn[k] how many hidden neurons RBM k uses, so every evaluated
// topology (784x10 up to 784x800x800x10) maps onto the same fabric: the
// output of the last RBM in use is dbn_out. Between islands a fixed routing
// chain feeds the (masked) hidden outputs of RBM k to the visible lines of
// RBM k+1; the paper's FPGA-style routing network is not modelled.
//
// One cd_controller, sized for the largest RBM, is switched by
// cfg_train_layer onto one island; the others stay in read mode (RWL high,
// WWL low, BL/SL floating). In test the controller rests in feed-forward and
// the whole DBN evaluates combinationally in one cycle. Setting train runs
// one CD iteration on the selected RBM in cfg_hn[cfg_train_layer]+3 clocks,
// using the data propagated up from data_in as its visible vector; layers
// are trained bottom-up by changing cfg_train_layer between iterations.
//
// The Boolean side of the fabric is a bank of NUM_LUT LUT-FF pairs built from
// non-volatile SHE-MTJ LUTs, configured cell by cell through the lut_cfg_*
// port. Pairs 0..N_TEST_LUT-1 are always powered; the others are powered
// only while a training iteration is requested or running, or while being
// configured, which mirrors the paper's observation that 3 of the 32 pairs
// of its 4x2 controller serve the test operation and the rest can be gated.
// The LUT bank is not wired to the controller: the controller is ordinary
// RTL here, and mapping it onto the LUTs is the job of an FPGA flow.
module snra_top
  import snra_pkg::*;
#(
  parameter int unsigned N0         = 784,
  parameter int unsigned N1         = 800,
  parameter int unsigned N2         = 800,
  parameter int unsigned N3         = 10,
  parameter int unsigned NUM_LUT    = 32,
  parameter int unsigned N_TEST_LUT = 3,
  parameter int unsigned DW_LEVELS  = 17,
  parameter int unsigned DW_STEP    = 1,
  localparam int unsigned NVM = (N0 > N1) ? ((N0 > N2) ? N0 : N2) : ((N1 > N2) ? N1 : N2),
  localparam int unsigned NHM = (N1 > N2) ? ((N1 > N3) ? N1 : N3) : ((N2 > N3) ? N2 : N3),
  localparam int unsigned CW  = $clog2(NHM + 1),
  localparam int unsigned VW  = $clog2(NVM + 1),
  localparam int unsigned LW  = (NUM_LUT > 1) ? $clog2(NUM_LUT) : 1
) (
  input  logic                    clk,
  input  logic                    rst,
  // DBN configuration
  input  logic [1:0]              cfg_nlayers,       // 1..3 RBMs in use
  input  logic [1:0]              cfg_train_layer,   // RBM under training
  input  logic [2:0][CW-1:0]      cfg_hn,            // hidden neurons used per RBM
  // operation
  input  logic                    train,
  input  logic [N0-1:0]           data_in,
  output logic [NHM-1:0]          dbn_out,
  output cd_state_t               state,
  output logic [CW-1:0]           cnt,
  output logic                    upd_done,
  // Boolean fabric
  input  logic                    lut_cfg_we,
  input  logic [LW-1:0]           lut_cfg_sel,
  input  logic [6:0]              lut_cfg_addr,
  input  logic                    lut_cfg_bit,
  input  logic [NUM_LUT-1:0][5:0] lut_in,
  output logic [NUM_LUT-1:0]      lut_o6,
  output logic [NUM_LUT-1:0]      lut_o5,
  output logic [NUM_LUT-1:0]      lut_pwr_en
);

  // ---------------------------------------------------------------- controller
  logic [NVM-1:0] c_vis_in, c_vis_sense, c_v_bar;
  logic [NHM-1:0] c_hid_sense, c_h, c_wwl, c_rwl;
  logic           c_wl_oe;
  line_drive_t    c_bl [NVM];
  line_drive_t    c_sl [NVM];
  logic [CW-1:0]  c_hn;

  assign c_hn = cfg_hn[cfg_train_layer];

  cd_controller #(.NV(NVM), .NH(NHM)) u_ctrl (
    .clk, .rst, .train, .hn(c_hn),
    .vis_in(c_vis_in), .vis_sense(c_vis_sense), .hid_sense(c_hid_sense),
    .drive_en(), .v(), .h(c_h), .v_bar(c_v_bar),
    .wwl(c_wwl), .rwl(c_rwl), .wl_oe(c_wl_oe),
    .bl_drv(c_bl), .sl_drv(c_sl),
    .state, .cnt, .upd_done, .bl_reg(), .sl_reg()
  );

  // ------------------------------------------------------------- RBM islands
  // Island k holds RBM k; the routing chain is data_in -> RBM0 -> RBM1 -> RBM2,
  // each link carrying only the hidden neurons in use.
  logic [N1-1:0] hu0;
  logic [N2-1:0] hu1;
  logic [N3-1:0] hu2;
  logic [NVM-1:0] vi0, vi1, vi2, vs0, vs1, vs2;

  rbm_island #(.NV(N0), .NH(N1), .NVM(NVM), .NHM(NHM),
               .DW_LEVELS(DW_LEVELS), .DW_STEP(DW_STEP)) u_isl0 (
    .clk, .sel(cfg_train_layer == 2'd0), .wl_oe(c_wl_oe),
    .hn(cfg_hn[0]), .nv_used(VW'(N0)), .route_in(data_in),
    .c_state(state), .c_h, .c_v_bar,
    .c_wwl, .c_rwl, .c_bl, .c_sl,
    .vis_in_used(vi0), .vis_used(vs0), .hid_used(hu0)
  );

  rbm_island #(.NV(N1), .NH(N2), .NVM(NVM), .NHM(NHM),
               .DW_LEVELS(DW_LEVELS), .DW_STEP(DW_STEP)) u_isl1 (
    .clk, .sel(cfg_train_layer == 2'd1), .wl_oe(c_wl_oe),
    .hn(cfg_hn[1]), .nv_used(VW'(cfg_hn[0])), .route_in(hu0),
    .c_state(state), .c_h, .c_v_bar,
    .c_wwl, .c_rwl, .c_bl, .c_sl,
    .vis_in_used(vi1), .vis_used(vs1), .hid_used(hu1)
  );

  rbm_island #(.NV(N2), .NH(N3), .NVM(NVM), .NHM(NHM),
               .DW_LEVELS(DW_LEVELS), .DW_STEP(DW_STEP)) u_isl2 (
    .clk, .sel(cfg_train_layer == 2'd2), .wl_oe(c_wl_oe),
    .hn(cfg_hn[2]), .nv_used(VW'(cfg_hn[1])), .route_in(hu1),
    .c_state(state), .c_h, .c_v_bar,
    .c_wwl, .c_rwl, .c_bl, .c_sl,
    .vis_in_used(vi2), .vis_used(vs2), .hid_used(hu2)
  );

  // Controller side of the switch.
  always_comb begin
    unique case (cfg_train_layer)
      2'd1:    begin c_vis_in = vi1; c_vis_sense = vs1; c_hid_sense = NHM'(hu1); end
      2'd2:    begin c_vis_in = vi2; c_vis_sense = vs2; c_hid_sense = NHM'(hu2); end
      default: begin c_vis_in = vi0; c_vis_sense = vs0; c_hid_sense = NHM'(hu0); end
    endcase
  end

  // Output of the last RBM in use.
  always_comb begin
    unique case (cfg_nlayers)
      2'd2:    dbn_out = NHM'(hu1);
      2'd3:    dbn_out = NHM'(hu2);
      default: dbn_out = NHM'(hu0);
    endcase
  end

  // ------------------------------------------------------ Boolean LUT fabric
  logic train_active;
  assign train_active = (state != ST_FEED_FORWARD) || train;

  for (genvar n = 0; n < int'(NUM_LUT); n++) begin : g_lut
    logic sel;
    assign sel           = lut_cfg_we && (lut_cfg_sel == LW'(n));
    assign lut_pwr_en[n] = (n < int'(N_TEST_LUT)) || train_active || sel;

    lut_ff_pair u_pair (
      .clk, .pwr_en(lut_pwr_en[n]),
      .cfg_we(sel), .cfg_addr(lut_cfg_addr), .cfg_bit(lut_cfg_bit),
      .in(lut_in[n]), .o6(lut_o6[n]), .o5(lut_o5[n])
    );
  end

endmodule
