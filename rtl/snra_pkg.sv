// snra_pkg: types shared by the SNRA contrastive-divergence (CD) controller,
// its line drivers and the behavioural RBM model.
//
// cd_state_t holds the four states of the CD finite state machine. The
// states and their order are the paper's; the two-bit encoding is this
// design's choice. line_drive_t encodes the three levels a bit line or a
// source line of the weight crossbar can take during training: high
// impedance, ground, or the training voltage Vtrain.
package snra_pkg;

  typedef enum logic [1:0] {
    ST_FEED_FORWARD = 2'd0,  // test operation, and first step of a CD iteration
    ST_FEED_BACK    = 2'd1,  // h driven back, v_bar sampled
    ST_RECONSTRUCT  = 2'd2,  // v_bar driven, h_bar sampled
    ST_UPDATE       = 2'd3   // one weight column written per clock
  } cd_state_t;

  typedef enum logic [1:0] {
    LINE_HIZ    = 2'd0,
    LINE_GND    = 2'd1,
    LINE_VTRAIN = 2'd2
  } line_drive_t;

endpackage
