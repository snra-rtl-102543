// rw_line_driver: read/write word-line driver of an RBM crossbar.
//
// Follows the signalling table of the paper: in feed-forward (test),
// feed-back and reconstruct every read word line RWL is at VDD and every
// write word line WWL at ground, so the read transmission gates conduct and
// the write path is off. In update, RWL is at ground and only WWL[cnt], the
// column being written this cycle, is at VDD. For the paper's 4x2 example
// this gives WWL = 0,0,0,1,2 and RWL = 3,3,3,0,0 over the five cycles.
// Columns at or above hn are unused and keep RWL low (this design's choice).
// wl_oe = 0 marks the lines as floating (Hi-Z) during initialization.
// Purely combinational from the registered FSM state.
module rw_line_driver
  import snra_pkg::*;
#(
  parameter int unsigned NH = 800,
  localparam int unsigned CW = $clog2(NH + 1)
) (
  input  cd_state_t     state,
  input  logic [CW-1:0] cnt,
  input  logic [CW-1:0] hn,
  input  logic          drive_en,
  output logic [NH-1:0] wwl,
  output logic [NH-1:0] rwl,
  output logic          wl_oe
);

  always_comb begin
    for (int j = 0; j < int'(NH); j++) begin
      wwl[j] = drive_en && (state == ST_UPDATE) && (int'(cnt) == j);
      rwl[j] = drive_en && (state != ST_UPDATE) && (j < int'(hn));
    end
  end

  assign wl_oe = drive_en;

endmodule
