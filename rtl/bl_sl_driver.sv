// bl_sl_driver: bit-line and source-line driver of an RBM crossbar.
//
// Converts the BL_reg/SL_reg bits of the update datapath into line levels as
// listed in the paper's signalling table. Outside the update state both
// lines of every row float (Hi-Z), disconnecting the write path. In update a
// row whose BL_reg bit is 1 gets BL = Vtrain, otherwise BL = GND; likewise
// SL from SL_reg. BL=Vtrain, SL=GND increases the selected weight,
// BL=GND, SL=Vtrain decreases it; equal levels leave it unchanged. The
// analog levels are encoded as snra_pkg::line_drive_t. Combinational.
module bl_sl_driver
  import snra_pkg::*;
#(
  parameter int unsigned NV = 800
) (
  input  logic          upd,      // FSM is in the update state
  input  logic [NV-1:0] bl_reg,
  input  logic [NV-1:0] sl_reg,
  output line_drive_t   bl_drv [NV],
  output line_drive_t   sl_drv [NV]
);

  always_comb begin
    for (int i = 0; i < int'(NV); i++) begin
      if (!upd) begin
        bl_drv[i] = LINE_HIZ;
        sl_drv[i] = LINE_HIZ;
      end else begin
        bl_drv[i] = bl_reg[i] ? LINE_VTRAIN : LINE_GND;
        sl_drv[i] = sl_reg[i] ? LINE_VTRAIN : LINE_GND;
      end
    end
  end

endmodule
