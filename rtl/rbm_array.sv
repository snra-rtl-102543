// rbm_array: behavioural model (not synthesizable) of one probabilistic
// island of the SNRA, an NV x NH restricted Boltzmann machine.
//
// Each weighted connection is a three-terminal SHE domain-wall-motion device
// whose domain-wall position sets its conductance. The model keeps that
// position as an integer 0..DW_LEVELS-1 per connection and uses
// (position - MID) as the signed weight w[i][j]; the number of levels and the
// linear map are this model's choices.
//
// Read (RWL[j] = VDD): the driven visible lines inject a current
// sum_i vis_drive[i] * w[i][j] into hidden p-bit j; when the hidden lines are
// driven instead, visible p-bit i receives sum_j hid_drive[j] * w[i][j] over
// the columns whose RWL is high. Current flows one way per phase, as the CD
// phases use it, so the model has no combinational loop.
// Write (WWL[j] = VDD): at the clock edge each row i of column j moves its
// domain wall by DW_STEP up when BL=Vtrain and SL=GND, down when BL=GND and
// SL=Vtrain, and not at all otherwise, saturating at the ends of the track.
// DW_STEP stands for the Vtrain amplitude, i.e. the learning rate eta.
// Bias cells are not modelled because the CD update writes only W.
module rbm_array
  import snra_pkg::*;
#(
  parameter int unsigned NV        = 784,
  parameter int unsigned NH        = 800,
  parameter int unsigned DW_LEVELS = 17,
  parameter int unsigned DW_STEP   = 1,
  parameter real         I0        = 1.0
) (
  input  logic          clk,
  input  logic [NV-1:0] vis_drive,
  input  logic          vis_drive_en,
  input  logic [NH-1:0] hid_drive,
  input  logic          hid_drive_en,
  input  logic [NH-1:0] wwl,
  input  logic [NH-1:0] rwl,
  input  line_drive_t   bl_drv [NV],
  input  line_drive_t   sl_drv [NV],
  output logic [NV-1:0] vis_out,
  output logic [NH-1:0] hid_out
);

  localparam int MID = int'(DW_LEVELS) / 2;

  logic [7:0] dw_pos [NV][NH];   // domain-wall position per connection
  int         hid_i  [NH];
  int         vis_i  [NV];

  initial begin
    for (int i = 0; i < int'(NV); i++)
      for (int j = 0; j < int'(NH); j++)
        dw_pos[i][j] = 8'(MID);
  end

  // Currents into the p-bits.
  always_comb begin
    for (int j = 0; j < int'(NH); j++) hid_i[j] = 0;
    for (int i = 0; i < int'(NV); i++) vis_i[i] = 0;
    if (vis_drive_en) begin
      for (int i = 0; i < int'(NV); i++)
        if (vis_drive[i])
          for (int j = 0; j < int'(NH); j++)
            if (rwl[j]) hid_i[j] += int'(dw_pos[i][j]) - MID;
    end
    if (hid_drive_en) begin
      for (int i = 0; i < int'(NV); i++)
        for (int j = 0; j < int'(NH); j++)
          if (rwl[j] && hid_drive[j]) vis_i[i] += int'(dw_pos[i][j]) - MID;
    end
  end

  // Domain-wall motion in the selected column.
  always_ff @(posedge clk) begin
    for (int j = 0; j < int'(NH); j++) begin
      if (wwl[j]) begin
        for (int i = 0; i < int'(NV); i++) begin
          if (bl_drv[i] == LINE_VTRAIN && sl_drv[i] == LINE_GND)
            dw_pos[i][j] <= 8'((int'(dw_pos[i][j]) + int'(DW_STEP) > int'(DW_LEVELS) - 1)
                               ? int'(DW_LEVELS) - 1 : int'(dw_pos[i][j]) + int'(DW_STEP));
          else if (bl_drv[i] == LINE_GND && sl_drv[i] == LINE_VTRAIN)
            dw_pos[i][j] <= 8'((int'(dw_pos[i][j]) < int'(DW_STEP))
                               ? 0 : int'(dw_pos[i][j]) - int'(DW_STEP));
        end
      end
    end
  end

  for (genvar j = 0; j < int'(NH); j++) begin : g_hid
    pbit_neuron #(.I0(I0)) u_pbit (.clk, .i_in(hid_i[j]), .v_out(hid_out[j]));
  end
  for (genvar i = 0; i < int'(NV); i++) begin : g_vis
    pbit_neuron #(.I0(I0)) u_pbit (.clk, .i_in(vis_i[i]), .v_out(vis_out[i]));
  end

endmodule
