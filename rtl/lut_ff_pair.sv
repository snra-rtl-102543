// lut_ff_pair: one LUT-FF pair of an SNRA configurable logic block.
//
// A fracturable SHE-MTJ LUT6 (she_mtj_lut6) feeds a flip-flop; a 65th
// non-volatile configuration cell (address 64) selects whether o6 is the
// registered or the direct LUT output. o5 is the LUT's second (5-input)
// output. The paper counts resources in such pairs but does not draw one,
// so the single flip-flop with bypass is this design's choice. The flip-flop
// is CMOS: it is cleared while the pair is power-gated (pwr_en low), whereas
// the LUT contents and the select cell survive gating.
module lut_ff_pair (
  input  logic       clk,
  input  logic       pwr_en,
  input  logic       cfg_we,
  input  logic [6:0] cfg_addr,   // 0..63 LUT cells, 64 output select
  input  logic       cfg_bit,
  input  logic [5:0] in,
  output logic       o6,
  output logic       o5
);

  logic out1, q, use_ff;

  she_mtj_lut6 u_lut (
    .clk, .pwr_en,
    .cfg_we(cfg_we && !cfg_addr[6]), .cfg_addr(cfg_addr[5:0]), .cfg_bit,
    .in, .out1, .out2(o5)
  );

  always_ff @(posedge clk) begin
    if (pwr_en && cfg_we && cfg_addr == 7'd64) use_ff <= cfg_bit;
    q <= pwr_en ? out1 : 1'b0;
  end

  assign o6 = pwr_en & (use_ff ? q : out1);

endmodule
