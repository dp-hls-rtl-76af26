// dphls_pe: one processing element -- the cell recurrence of the linear-gap
// alignment kernels.
//
// Given the three neighbour scores of cell (i,j) -- up H(i-1,j), diagonal
// H(i-1,j-1), left H(i,j-1) -- the query character of row i and the reference
// character of column j, it computes
//     ins   = left + linear_gap
//     del   = up   + linear_gap
//     match = diag + (qry == ref ? match : mismatch)
//     H     = max(ins, match, del)          (and max(.., 0) for local)
// and a 2-bit traceback pointer naming the winning term.  Ties are broken
// exactly as in the reference max/pointer code of the framework: start from
// ins (TB_LEFT), replace only on a strictly larger match (TB_DIAG), then on a
// strictly larger del (TB_UP), then for the local kernel on a negative value
// (score 0, TB_END).
//
// Purely combinational; the systolic array registers the result.  Adders
// wrap at SCORE_W bits (no saturation), which is this design's choice.
module dphls_pe
  import dphls_pkg::*;
#(
  parameter kernel_e KERNEL = K_GLOBAL_LINEAR
) (
  input  scoring_params_t params,
  input  char_t           qry,
  input  char_t           ref_c,
  input  score_t          up,
  input  score_t          diag,
  input  score_t          left,
  output score_t          score,
  output tb_ptr_e         tbp
);

  score_t ins_s, del_s, mat_s;

  always_comb begin
    ins_s = left + params.linear_gap;
    del_s = up   + params.linear_gap;
    mat_s = diag + ((qry == ref_c) ? params.match : params.mismatch);

    score = ins_s;
    tbp   = TB_LEFT;
    if (score < mat_s) begin
      score = mat_s;
      tbp   = TB_DIAG;
    end
    if (score < del_s) begin
      score = del_s;
      tbp   = TB_UP;
    end
    if (kernel_is_local(KERNEL) && (score < 0)) begin
      score = '0;
      tbp   = TB_END;
    end
  end

endmodule
