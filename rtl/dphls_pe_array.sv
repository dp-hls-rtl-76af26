// dphls_pe_array: linear systolic array of N_PE processing elements.
//
// The query is cut into chunks of N_PE consecutive rows; PE p owns row
// i = row_base + p + 1 of the current chunk.  The reference streams through
// the array: in wavefront wf (one per cycle, initiation interval 1) PE p
// scores cell (i, j) with j = wf - p + 1, so all cells of one anti-diagonal
// are scored in the same cycle.  A chunk takes ref_len + N_PE - 1 wavefronts.
//
// Local storage, all fully partitioned registers:
//   qry_r   local query buffer: the query character of each PE's row,
//           loaded at chunk start.
//   ref_sr  local reference buffer: a shift register moving the reference
//           character one PE further each wavefront (PE0 takes ref_in).
//   left_r  score buffer: the score each PE produced in the last wavefront;
//           it is the PE's own "left" neighbour and the "up" neighbour of the
//           next PE.
//   diag_r  DP memory buffer for the wavefront before that: the "up" value a
//           PE saw one wavefront ago, i.e. its diagonal neighbour now.
// PE0's "up" comes from the preserved row buffer (up_in = row buffer entry
// for column wf+1).  At chunk load every PE gets left = init_col[i] and
// diag = init_col[i-1], the column-0 boundary of its row.
//
// Each PE also keeps the best cell it has scored that may start the
// traceback for this kernel (best[p]); clear_best empties them.
//
// Outputs of a wavefront (tbp, tb_we, last_*) are combinational and valid in
// the cycle 'step' is high; the registers update at the end of that cycle.
module dphls_pe_array
  import dphls_pkg::*;
#(
  parameter kernel_e KERNEL               = K_GLOBAL_LINEAR,
  parameter int      N_PE                 = 64,
  parameter int      MAX_QUERY_LENGTH     = 256,
  parameter int      MAX_REFERENCE_LENGTH = 256,
  localparam int     QW  = $clog2(MAX_QUERY_LENGTH + 1),
  localparam int     RW  = $clog2(MAX_REFERENCE_LENGTH + 1),
  localparam int     WFW = $clog2(MAX_REFERENCE_LENGTH + N_PE)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  scoring_params_t params,
  input  logic [QW-1:0]   q_len,
  input  logic [RW-1:0]   r_len,
  input  logic            clear_best,
  // chunk load
  input  logic            chunk_load,
  input  logic [QW-1:0]   row_base,
  input  char_t           q_chunk   [N_PE],
  input  score_t          init_left [N_PE],
  input  score_t          init_diag [N_PE],
  // wavefront step
  input  logic            step,
  input  logic [WFW-1:0]  wf,
  input  char_t           ref_in,
  input  score_t          up_in,
  output tb_ptr_e         tbp       [N_PE],
  output logic [N_PE-1:0] tb_we,
  output logic            last_we,
  output logic [RW-1:0]   last_col,
  output score_t          last_score,
  output cand_t           best      [N_PE]
);

  char_t  qry_r  [N_PE];
  char_t  ref_sr [N_PE];
  score_t left_r [N_PE];
  score_t diag_r [N_PE];
  cand_t  best_r [N_PE];

  score_t  pe_score [N_PE];
  tb_ptr_e pe_tbp   [N_PE];
  char_t   pe_ref   [N_PE];
  score_t  pe_up    [N_PE];
  logic    pe_act   [N_PE];
  logic [RW-1:0] pe_col [N_PE];
  logic [QW-1:0] pe_row [N_PE];

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    always_comb begin
      pe_ref[p] = (p == 0) ? ref_in : ref_sr[(p == 0) ? 0 : p-1];
      pe_up[p]  = (p == 0) ? up_in  : left_r[(p == 0) ? 0 : p-1];
      pe_row[p] = QW'(row_base + QW'(p) + 1'b1);
      pe_col[p] = RW'(wf - WFW'(p) + 1'b1);
      pe_act[p] = (wf >= WFW'(p)) && ((wf - WFW'(p)) < WFW'(r_len)) &&
                  (pe_row[p] <= q_len);
    end

    dphls_pe #(.KERNEL(KERNEL)) u_pe (
      .params (params),
      .qry    (qry_r[p]),
      .ref_c  (pe_ref[p]),
      .up     (pe_up[p]),
      .diag   (diag_r[p]),
      .left   (left_r[p]),
      .score  (pe_score[p]),
      .tbp    (pe_tbp[p])
    );

    assign tbp[p]   = pe_tbp[p];
    assign tb_we[p] = step && pe_act[p];
    assign best[p]  = best_r[p];
  end

  assign last_we    = step && pe_act[N_PE-1];
  assign last_col   = pe_col[N_PE-1];
  assign last_score = pe_score[N_PE-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < N_PE; p++) begin
        qry_r[p]  <= '0;
        ref_sr[p] <= '0;
        left_r[p] <= '0;
        diag_r[p] <= '0;
        best_r[p] <= '0;
      end
    end else begin
      if (clear_best) begin
        for (int p = 0; p < N_PE; p++) best_r[p] <= '0;
      end
      if (chunk_load) begin
        for (int p = 0; p < N_PE; p++) begin
          qry_r[p]  <= q_chunk[p];
          left_r[p] <= init_left[p];
          diag_r[p] <= init_diag[p];
        end
      end else if (step) begin
        ref_sr[0] <= ref_in;
        for (int p = 1; p < N_PE; p++) ref_sr[p] <= ref_sr[p-1];
        for (int p = 0; p < N_PE; p++) begin
          if (pe_act[p]) begin
            left_r[p] <= pe_score[p];
            diag_r[p] <= pe_up[p];
            if (start_eligible(KERNEL, 16'(pe_row[p]), 16'(pe_col[p]), 16'(q_len), 16'(r_len)) &&
                cand_better('{valid: 1'b1, score: pe_score[p], row: 16'(pe_row[p]), col: 16'(pe_col[p])},
                            best_r[p]))
              best_r[p] <= '{valid: 1'b1, score: pe_score[p], row: 16'(pe_row[p]), col: 16'(pe_col[p])};
          end
        end
      end
    end
  end

endmodule
