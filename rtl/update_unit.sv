// update_unit: datapath of the UPDATE state of the CD FSM.
//
// For the column c written in an update cycle, a multiplexer picks h[c] and
// h_bar[c]; AND gates form v & h[c] (the column c of v h^T) and
// v_bar & h_bar[c] (the column of v' h'^T), and the results sit in BL_reg
// and SL_reg. A row with BL_reg=1, SL_reg=0 gets its weight increased, one
// with BL_reg=0, SL_reg=1 decreased, which is Eq. (4) dW = eta (v h^T -
// v' h'^T) one column at a time. The structure (counter-selected
// multiplexers, AND gates, BL_reg/SL_reg) is the paper's.
//
// Timing (this design's choice): the registers are loaded at the edge that
// starts each update cycle, from `load` (next state is UPDATE), `col` (next
// column) and h_bar_nxt (next h_bar), so BL/SL hold column c during exactly
// the cycle in which WWL[c] is high. Outside update they hold zero.
module update_unit #(
  parameter int unsigned NV = 800,
  parameter int unsigned NH = 800,
  localparam int unsigned CW = $clog2(NH + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          load,
  input  logic [CW-1:0] col,
  input  logic [NV-1:0] v,
  input  logic [NH-1:0] h,
  input  logic [NV-1:0] v_bar,
  input  logic [NH-1:0] h_bar_nxt,
  output logic [NV-1:0] bl_reg,
  output logic [NV-1:0] sl_reg
);

  logic h_sel, hb_sel;

  // Counter-selected multiplexers; a column past NH selects 0.
  always_comb begin
    h_sel  = 1'b0;
    hb_sel = 1'b0;
    if (int'(col) < int'(NH)) begin
      h_sel  = h[col];
      hb_sel = h_bar_nxt[col];
    end
  end

  always_ff @(posedge clk) begin
    if (rst || !load) begin
      bl_reg <= '0;
      sl_reg <= '0;
    end else begin
      bl_reg <= v     & {NV{h_sel}};
      sl_reg <= v_bar & {NV{hb_sel}};
    end
  end

endmodule
