// she_mtj_lut6: six-input fracturable look-up table whose 64 configuration
// cells are non-volatile, high-barrier SHE-MTJs, the logic element of the
// SNRA's Boolean configurable logic blocks.
//
// The inputs in[5:0] (A..F) steer a select tree to one stored cell, and a
// pre-charge sense amplifier compares it with a reference MTJ. Two sense
// amplifiers give two outputs, so the LUT is one 6-input function (out1) or,
// with in[5] tied high, two 5-input functions of in[4:0] (out1 from cells
// 32..63, out2 from cells 0..31). The split of cells between the outputs is
// this design's choice, the same as common fracturable LUTs.
// Configuration: cfg_we writes cfg_bit into cell cfg_addr at the clock edge
// (one cycle; the SHE write takes under 2 ns). Power gating: with pwr_en low
// the sense amplifiers are off and both outputs read 0, but the cells keep
// their contents because the MTJs are non-volatile; no write happens while
// gated. The cells have no reset, as a non-volatile memory.
module she_mtj_lut6 (
  input  logic       clk,
  input  logic       pwr_en,
  input  logic       cfg_we,
  input  logic [5:0] cfg_addr,
  input  logic       cfg_bit,
  input  logic [5:0] in,
  output logic       out1,
  output logic       out2
);

  logic [63:0] mtj;   // SHE-MTJ 0..63

  always_ff @(posedge clk)
    if (pwr_en && cfg_we) mtj[cfg_addr] <= cfg_bit;

  assign out1 = pwr_en & mtj[in];
  assign out2 = pwr_en & mtj[{1'b0, in[4:0]}];

endmodule
