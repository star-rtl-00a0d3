// star_pkg: sizes and types shared by the RRAM softmax engine.
//
// The engine computes softmax(x) for vectors of signed fixed-point scores.
// Scores are 9-bit two's complement Q6.3 (6 integer bits including the sign,
// 3 fraction bits), the widest format the engine is sized for. The CAM/SUB
// crossbar has one row per representable score (512 rows); the exponential
// CAM, LUT and VMM crossbars have 256 rows, one per magnitude |x_i - x_max|
// from 0 to 31.875. LUT words are 18-bit fractions of one. These sizes follow
// the published crossbar dimensions (512x18 and 256x18); the counter width,
// the output format (unsigned Q0.16) and the vector length limit of 512 are
// choices of this design.
package star_pkg;

  localparam int unsigned DATA_W   = 9;    // score width, Q6.3
  localparam int unsigned FRAC_W   = 3;    // fraction bits of a score
  localparam int unsigned SUB_ROWS = 512;  // CAM/SUB crossbar rows (2**DATA_W)
  localparam int unsigned EXP_ROWS = 256;  // exp CAM / LUT / VMM crossbar rows
  localparam int unsigned LUT_W    = 18;   // LUT and VMM word width (m)
  localparam int unsigned MAX_LEN  = 512;  // longest softmax vector
  localparam int unsigned CNT_W    = 10;   // per-row counter width
  localparam int unsigned OUT_W    = 16;   // output probability, Q0.16

  // Width of sum_j e^(x_j - x_max): MAX_LEN words of LUT_W bits.
  localparam int unsigned SUM_W    = LUT_W + CNT_W;

  typedef logic signed [DATA_W-1:0] score_t;

  // Operating mode of the time-multiplexed CAM/SUB crossbar.
  typedef enum logic {
    XB_CAM = 1'b0,   // search: key on the search lines, match vector out
    XB_SUB = 1'b1    // compute: +1/-1 on the word lines, column sums out
  } xb_mode_e;

  // Which crossbar the programming port writes.
  typedef enum logic [1:0] {
    PROG_CAMSUB = 2'd0,
    PROG_EXPCAM = 2'd1,
    PROG_LUT    = 2'd2,
    PROG_VMM    = 2'd3
  } prog_sel_e;

endpackage
