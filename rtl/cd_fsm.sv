// cd_fsm: four-state finite state machine that sequences contrastive
// divergence (CD) training and the test operation of one RBM.
//
// States follow the paper: the machine rests in FEED_FORWARD while testing.
// When `train` is high in FEED_FORWARD, the current visible input and hidden
// sample are captured (cap_vh) and the machine walks FEED_BACK (capture
// v_bar), RECONSTRUCT (capture h_bar) and UPDATE. UPDATE lasts `hn` clocks,
// one per hidden column, with the column counter running 0..hn-1; then the
// machine returns to FEED_FORWARD. A training iteration therefore takes
// hn+3 clocks. hn is an input so that one FSM, sized for the largest RBM,
// serves every RBM of a deep belief network in turn; hn = 0 acts as 1.
//
// Outputs nxt_state/nxt_cnt are the values the registers take at the next
// edge; the update datapath uses them to load its output registers so that
// bit/source lines change together with the word lines.
//
// Reset (synchronous, active high) is the "initialization" phase of the
// paper's waveform: drive_en is low, so every array line is left floating;
// it rises at the first clock after reset. The reset behaviour is this
// design's choice.
module cd_fsm
  import snra_pkg::*;
#(
  parameter int unsigned MAX_H = 800,
  localparam int unsigned CW   = $clog2(MAX_H + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          train,
  input  logic [CW-1:0] hn,
  output cd_state_t     state,
  output cd_state_t     nxt_state,
  output logic [CW-1:0] cnt,
  output logic [CW-1:0] nxt_cnt,
  output logic          cap_vh,     // v, h captured at this edge
  output logic          cap_vbar,   // v_bar captured at this edge
  output logic          cap_hbar,   // h_bar captured at this edge
  output logic          upd_done,   // last update column in this cycle
  output logic          drive_en
);

  logic [CW-1:0] last_col;
  assign last_col = (hn == '0) ? '0 : CW'(hn - 1'b1);

  always_comb begin
    nxt_state = state;
    nxt_cnt   = cnt;
    unique case (state)
      ST_FEED_FORWARD: if (train) nxt_state = ST_FEED_BACK;
      ST_FEED_BACK:    nxt_state = ST_RECONSTRUCT;
      ST_RECONSTRUCT: begin
        nxt_state = ST_UPDATE;
        nxt_cnt   = '0;
      end
      ST_UPDATE: begin
        if (cnt >= last_col) begin
          nxt_state = ST_FEED_FORWARD;
          nxt_cnt   = '0;
        end else begin
          nxt_cnt   = CW'(cnt + 1'b1);
        end
      end
      default: nxt_state = ST_FEED_FORWARD;
    endcase
    if (rst) begin
      nxt_state = ST_FEED_FORWARD;
      nxt_cnt   = '0;
    end
  end

  assign cap_vh   = (state == ST_FEED_FORWARD) && train && !rst;
  assign cap_vbar = (state == ST_FEED_BACK) && !rst;
  assign cap_hbar = (state == ST_RECONSTRUCT) && !rst;
  assign upd_done = (state == ST_UPDATE) && (cnt >= last_col);

  always_ff @(posedge clk) begin
    state    <= nxt_state;
    cnt      <= nxt_cnt;
    drive_en <= !rst;
  end

  // The column counter never leaves 0..hn-1 while updating.
  a_cnt_range: assert property (@(posedge clk) disable iff (rst)
    (state == ST_UPDATE) |-> (cnt <= last_col));
  // Training steps are never skipped.
  a_fb_rc: assert property (@(posedge clk) disable iff (rst)
    (state == ST_FEED_BACK) |=> (state == ST_RECONSTRUCT));
  a_rc_up: assert property (@(posedge clk) disable iff (rst)
    (state == ST_RECONSTRUCT) |=> (state == ST_UPDATE));

endmodule
