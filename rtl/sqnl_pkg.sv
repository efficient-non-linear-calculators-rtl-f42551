// sqnl_pkg: types and constants shared by the square-law (SQNL) activation
// function generators and the LSTM cell built from them.
//
// All words are two's complement integers. With a word of R bits the
// generators treat 2^(R-2) as the value 1.0 (an R = 8 SQNL maps the netsum
// range -128..128, i.e. -2.0..2.0, onto -64..64, i.e. -1.0..1.0).
//
// act_mode_e selects which mapping a generator computes:
//   ACT_SQNL    symmetric square-law mapping, adder saturates at +-2^(R-2)
//   ACT_LOGSQNL the same mapping halved and offset by 2^(R-3) (LogSig-like)
//   ACT_GATED   symmetric mapping whose adder saturates at +-C, C taken from
//               a port (a multiplier-free scaling by C / 2^(R-2))
//   ACT_ASYM    asymmetric mapping (SQLU / SQ_Softplus family): offsets
//               shifted by -2^(R-2) + alpha, adder saturates below only
// The four modes and their parameters follow the paper; the encoding is this
// design's choice.
package sqnl_pkg;

  typedef enum logic [1:0] {
    ACT_SQNL    = 2'd0,
    ACT_LOGSQNL = 2'd1,
    ACT_GATED   = 2'd2,
    ACT_ASYM    = 2'd3
  } act_mode_e;

  // Default word size and oversampling length: R = 8 and N = 8 are the sizes
  // the paper evaluates most (its figures and its resource table).
  localparam int unsigned SQNL_R = 8;
  localparam int unsigned SQNL_N = 8;

endpackage
