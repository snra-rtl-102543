// cd_sample_regs: the four registers of a CD iteration, v, h, v_bar, h_bar.
//
// At the end of the training feed-forward cycle (cap_vh) the visible input
// and the sampled hidden layer are stored in v and h. At the end of
// feed-back (cap_vbar) the sampled visible layer goes to v_bar, and at the
// end of reconstruct (cap_hbar) the re-sampled hidden layer goes to h_bar.
// Bit i of each register holds neuron i (v_0 in the least significant bit),
// as in the paper. h_bar_d is the value h_bar takes at the next edge; the
// update datapath uses it to load its first column. Reset clears all four
// registers (this design's choice).
module cd_sample_regs #(
  parameter int unsigned NV = 800,
  parameter int unsigned NH = 800
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          cap_vh,
  input  logic          cap_vbar,
  input  logic          cap_hbar,
  input  logic [NV-1:0] vis_in,
  input  logic [NV-1:0] vis_sense,
  input  logic [NH-1:0] hid_sense,
  output logic [NV-1:0] v,
  output logic [NH-1:0] h,
  output logic [NV-1:0] v_bar,
  output logic [NH-1:0] h_bar,
  output logic [NH-1:0] h_bar_d
);

  assign h_bar_d = rst ? '0 : (cap_hbar ? hid_sense : h_bar);

  always_ff @(posedge clk) begin
    if (rst) begin
      v     <= '0;
      h     <= '0;
      v_bar <= '0;
    end else begin
      if (cap_vh) begin
        v <= vis_in;
        h <= hid_sense;
      end
      if (cap_vbar) v_bar <= vis_sense;
    end
    h_bar <= h_bar_d;
  end

endmodule
