// cd_controller: test/train control circuitry for the RBMs of a deep belief
// network, implementing contrastive divergence (CD) in hardware.
//
// It joins the four-state FSM (cd_fsm), the v/h/v_bar/h_bar registers
// (cd_sample_regs), the update datapath (update_unit), the word-line driver
// (rw_line_driver) and the bit/source-line driver (bl_sl_driver). The
// input/output buffer (io_buffer) that turns state, h and v_bar into drive
// values for the neuron lines sits at each RBM, so that it can take the
// RBM's own input vector; drive_en, h and v_bar are outputs for it. It is sized for the largest RBM (NV x NH);
// a smaller RBM uses the low bits of vis_in/vis_sense and hn hidden columns,
// so a whole DBN shares one controller, trained one RBM at a time as the
// paper proposes.
//
// Timing of one training iteration, train sampled in feed-forward:
//   cycle 0      FEED_FORWARD  vis_in driven, hidden sampled -> v, h
//   cycle 1      FEED_BACK     h driven, visible sampled     -> v_bar
//   cycle 2      RECONSTRUCT   v_bar driven, hidden sampled  -> h_bar
//   cycle 3..    UPDATE        column c = 0..hn-1: WWL[c]=1, BL=v&h[c],
//                              SL=v_bar&h_bar[c]
// hn+3 clocks in all. vis_sense/hid_sense are the p-bit outputs of the RBM,
// sampled at the clock edge that ends each phase.
module cd_controller
  import snra_pkg::*;
#(
  parameter int unsigned NV = 800,
  parameter int unsigned NH = 800,
  localparam int unsigned CW = $clog2(NH + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          train,
  input  logic [CW-1:0] hn,
  input  logic [NV-1:0] vis_in,
  input  logic [NV-1:0] vis_sense,
  input  logic [NH-1:0] hid_sense,
  // values for the neuron lines (see io_buffer)
  output logic          drive_en,
  output logic [NV-1:0] v,
  output logic [NH-1:0] h,
  output logic [NV-1:0] v_bar,
  // word lines
  output logic [NH-1:0] wwl,
  output logic [NH-1:0] rwl,
  output logic          wl_oe,
  // bit and source lines
  output line_drive_t   bl_drv [NV],
  output line_drive_t   sl_drv [NV],
  // status
  output cd_state_t     state,
  output logic [CW-1:0] cnt,
  output logic          upd_done,
  output logic [NV-1:0] bl_reg,
  output logic [NV-1:0] sl_reg
);

  cd_state_t     nxt_state;
  logic [CW-1:0] nxt_cnt;
  logic          cap_vh, cap_vbar, cap_hbar;
  logic [NH-1:0] h_bar_d;

  cd_fsm #(.MAX_H(NH)) u_fsm (
    .clk, .rst, .train, .hn,
    .state, .nxt_state, .cnt, .nxt_cnt,
    .cap_vh, .cap_vbar, .cap_hbar, .upd_done, .drive_en
  );

  cd_sample_regs #(.NV(NV), .NH(NH)) u_regs (
    .clk, .rst, .cap_vh, .cap_vbar, .cap_hbar,
    .vis_in, .vis_sense, .hid_sense,
    .v, .h, .v_bar, .h_bar(), .h_bar_d
  );

  update_unit #(.NV(NV), .NH(NH)) u_upd (
    .clk, .rst,
    .load(nxt_state == ST_UPDATE), .col(nxt_cnt),
    .v, .h, .v_bar, .h_bar_nxt(h_bar_d),
    .bl_reg, .sl_reg
  );

  rw_line_driver #(.NH(NH)) u_wl (
    .state, .cnt, .hn, .drive_en, .wwl, .rwl, .wl_oe
  );

  bl_sl_driver #(.NV(NV)) u_bl (
    .upd(state == ST_UPDATE), .bl_reg, .sl_reg, .bl_drv, .sl_drv
  );

endmodule
