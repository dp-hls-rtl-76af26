// dphls_pkg: types and constants shared by the 2-D dynamic-programming
// alignment engine (linear systolic array of processing elements).
//
// The engine aligns a query sequence (rows of the DP matrix) against a
// reference sequence (columns).  Characters are 2-bit DNA bases, as in the
// char_t type of the DNA kernels.  Scores are signed SCORE_W-bit integers
// (the width is this design's choice; 16 bits hold every score of a 256x256
// alignment with parameters up to +-60).  Traceback pointers are 2 bits, the
// minimum the linear-gap recurrence needs.
//
// kernel_e selects, at elaboration time, which member of the linear-gap
// family a block implements; they differ only in initialisation, the zero
// floor of the local kernel, and where traceback starts and stops:
//   K_GLOBAL_LINEAR      Needleman-Wunsch   (start bottom-right, end top-left)
//   K_LOCAL_LINEAR       Smith-Waterman     (start best cell, end at score 0)
//   K_OVERLAP_LINEAR     overlap            (start best cell of last row or
//                                            last column, end at top row or
//                                            left column)
//   K_SEMIGLOBAL_LINEAR  semi-global        (start best cell of last row,
//                                            end at top row)
package dphls_pkg;

  localparam int CHAR_W  = 2;
  localparam int SCORE_W = 16;

  typedef logic [CHAR_W-1:0]         char_t;
  typedef logic signed [SCORE_W-1:0] score_t;


  typedef enum logic [1:0] {
    K_GLOBAL_LINEAR     = 2'd0,
    K_LOCAL_LINEAR      = 2'd1,
    K_OVERLAP_LINEAR    = 2'd2,
    K_SEMIGLOBAL_LINEAR = 2'd3
  } kernel_e;

  // Runtime scoring parameters (ScoringParams of the linear kernels).
  // linear_gap is added to a neighbour score, so it is normally negative.
  typedef struct packed {
    score_t match;
    score_t mismatch;
    score_t linear_gap;
  } scoring_params_t;

  // Traceback pointer stored per cell (tb_t, 2 bits).
  typedef enum logic [1:0] {
    TB_LEFT = 2'd0,
    TB_DIAG = 2'd1,
    TB_UP   = 2'd2,
    TB_END  = 2'd3
  } tb_ptr_e;

  // Traceback moves written to the output path.
  typedef enum logic [1:0] {
    AL_MMI = 2'd0,   // match / mismatch: diagonal step
    AL_INS = 2'd1,   // insertion: step left  (reference consumed)
    AL_DEL = 2'd2,   // deletion:  step up    (query consumed)
    AL_END = 2'd3    // end of path marker
  } tb_move_e;


  // A candidate start cell for traceback.
  typedef struct packed {
    logic   valid;
    score_t score;
    logic [15:0] row;
    logic [15:0] col;
  } cand_t;

  // Local kernel clamps cell scores at zero.
  function automatic logic kernel_is_local(kernel_e k);
    return k == K_LOCAL_LINEAR;
  endfunction

  // Whether cell (row,col) may start the traceback for kernel k.
  function automatic logic start_eligible(kernel_e k, logic [15:0] row, logic [15:0] col,
                                          logic [15:0] q_len, logic [15:0] r_len);
    unique case (k)
      K_GLOBAL_LINEAR:     return (row == q_len) && (col == r_len);
      K_LOCAL_LINEAR:      return 1'b1;
      K_OVERLAP_LINEAR:    return (row == q_len) || (col == r_len);
      K_SEMIGLOBAL_LINEAR: return (row == q_len);
      default:             return 1'b0;
    endcase
  endfunction

  // a is preferred over b: higher score, ties go to the smaller row, then
  // the smaller column (the first cell in row-major order).
  function automatic logic cand_better(cand_t a, cand_t b);
    if (!a.valid) return 1'b0;
    if (!b.valid) return 1'b1;
    if (a.score != b.score) return a.score > b.score;
    if (a.row != b.row) return a.row < b.row;
    return a.col < b.col;
  endfunction

endpackage
