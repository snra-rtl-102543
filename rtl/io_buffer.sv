// io_buffer: input/output buffer between the CD controller and the neuron
// lines of an RBM.
//
// The visible and hidden neurons of an RBM are both driven and sensed,
// depending on the phase: in feed-forward the input vector drives the
// visible lines and the hidden neurons are sensed; in feed-back the stored
// h drives the hidden lines and the visible neurons are sensed; in
// reconstruct the stored v_bar drives the visible lines and the hidden
// neurons are sensed; in update nothing is driven (the read path is off).
// The phases come from the paper; the paper only names this buffer, so the
// enables and multiplexers are this design's. Combinational.
module io_buffer
  import snra_pkg::*;
#(
  parameter int unsigned NV = 800,
  parameter int unsigned NH = 800
) (
  input  cd_state_t     state,
  input  logic          drive_en,
  input  logic [NV-1:0] vis_in,
  input  logic [NH-1:0] h,
  input  logic [NV-1:0] v_bar,
  output logic [NV-1:0] vis_drive,
  output logic          vis_drive_en,
  output logic [NH-1:0] hid_drive,
  output logic          hid_drive_en
);

  always_comb begin
    vis_drive    = '0;
    hid_drive    = '0;
    vis_drive_en = 1'b0;
    hid_drive_en = 1'b0;
    if (drive_en) begin
      unique case (state)
        ST_FEED_FORWARD: begin vis_drive = vis_in; vis_drive_en = 1'b1; end
        ST_FEED_BACK:    begin hid_drive = h;      hid_drive_en = 1'b1; end
        ST_RECONSTRUCT:  begin vis_drive = v_bar;  vis_drive_en = 1'b1; end
        default: ;
      endcase
    end
  end

endmodule
