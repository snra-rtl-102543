// rbm_island: one probabilistic island of the SNRA, an rbm_array plus the
// switch that connects it either to the shared CD controller or to the
// routing chain of the deep belief network.
//
// The island's io_buffer drives its neuron lines: from the controller's
// state, h and v_bar when sel is high, as in feed-forward otherwise. When sel
// is high the word, bit and source lines come from the controller (bundles sized to the largest RBM, NVM x NHM; the island
// uses the low NV/NH bits). Otherwise the island is in read mode: its visible
// lines carry route_in (the previous RBM's output or the input data), RWL is
// high on the hn hidden columns in use, WWL low, BL/SL floating. Neurons
// beyond hn (hidden) and nv_used (visible) are masked to 0 on the way out,
// so a smaller topology can use a larger island. Combinational apart from
// the array's weight writes and p-bit sampling. The masking and switch are
// this design's; the paper only states that islands are connected through
// the fabric's routing.
module rbm_island
  import snra_pkg::*;
#(
  parameter int unsigned NV        = 784,
  parameter int unsigned NH        = 800,
  parameter int unsigned NVM       = 800,
  parameter int unsigned NHM       = 800,
  parameter int unsigned DW_LEVELS = 17,
  parameter int unsigned DW_STEP   = 1,
  localparam int unsigned CW = $clog2(NHM + 1),
  localparam int unsigned VW = $clog2(NVM + 1)
) (
  input  logic           clk,
  input  logic           sel,
  input  logic           wl_oe,
  input  logic [CW-1:0]  hn,
  input  logic [VW-1:0]  nv_used,
  input  logic [NV-1:0]  route_in,
  input  cd_state_t      c_state,
  input  logic [NHM-1:0] c_h,
  input  logic [NVM-1:0] c_v_bar,
  input  logic [NHM-1:0] c_wwl,
  input  logic [NHM-1:0] c_rwl,
  input  line_drive_t    c_bl [NVM],
  input  line_drive_t    c_sl [NVM],
  output logic [NVM-1:0] vis_in_used,
  output logic [NVM-1:0] vis_used,
  output logic [NH-1:0]  hid_used
);

  logic [NV-1:0] vis_drive, vis_out, vmask;
  logic [NH-1:0] hid_drive, wwl, rwl, hid_out, hmask;
  logic          vis_en, hid_en;
  line_drive_t   bl [NV];
  line_drive_t   sl [NV];

  always_comb begin
    for (int j = 0; j < int'(NH); j++) hmask[j] = (j < int'(hn));
    for (int i = 0; i < int'(NV); i++) vmask[i] = (i < int'(nv_used));
  end

  io_buffer #(.NV(NV), .NH(NH)) u_io (
    .state(sel ? c_state : ST_FEED_FORWARD), .drive_en(wl_oe),
    .vis_in(route_in & vmask), .h(c_h[NH-1:0]), .v_bar(c_v_bar[NV-1:0]),
    .vis_drive, .vis_drive_en(vis_en), .hid_drive, .hid_drive_en(hid_en)
  );

  always_comb begin
    if (sel) begin
      wwl       = c_wwl[NH-1:0];
      rwl       = c_rwl[NH-1:0];
      for (int i = 0; i < int'(NV); i++) begin
        bl[i] = c_bl[i];
        sl[i] = c_sl[i];
      end
    end else begin
      wwl       = '0;
      rwl       = wl_oe ? hmask : '0;
      for (int i = 0; i < int'(NV); i++) begin
        bl[i] = LINE_HIZ;
        sl[i] = LINE_HIZ;
      end
    end
  end

  rbm_array #(.NV(NV), .NH(NH), .DW_LEVELS(DW_LEVELS), .DW_STEP(DW_STEP)) u_rbm (
    .clk, .vis_drive, .vis_drive_en(vis_en), .hid_drive, .hid_drive_en(hid_en),
    .wwl, .rwl, .bl_drv(bl), .sl_drv(sl), .vis_out, .hid_out
  );

  assign hid_used    = hid_out & hmask;
  assign vis_used    = NVM'(vis_out & vmask);
  assign vis_in_used = NVM'(route_in & vmask);

endmodule
