// tb_dphls_pe_array: self-checking test of the systolic PE array.
//
// The testbench plays the block's sequencer: it keeps the preserved row
// and the initial column, loads each chunk and steps R + N_PE - 1
// wavefronts.  Two arrays (global and local kernel) see the same stimulus;
// the gap is 0 so that both kernels share the all-zero boundary inputs
// (non-zero gaps are covered by the block test).
// Every pointer each PE emits is mapped back to its cell (i,j) from the PE
// index and wavefront number and compared with a row-major reference fill;
// the last PE's row-buffer writes are compared with the reference scores of
// the chunk's last row; after the fill each PE's best cell is compared with
// the best cell of the rows that PE owned.
module tb_dphls_pe_array;
  import dphls_pkg::*;

  localparam int N_PE = 4;
  localparam int MAXQ = 16;
  localparam int MAXR = 16;
  localparam int QW = $clog2(MAXQ + 1);
  localparam int RW = $clog2(MAXR + 1);
  localparam int WFW = $clog2(MAXR + N_PE);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  scoring_params_t params;
  logic [QW-1:0] q_len, row_base;
  logic [RW-1:0] r_len;
  logic clear_best, chunk_load, step;
  char_t q_chunk [N_PE];
  score_t init_left [N_PE], init_diag [N_PE];
  logic [WFW-1:0] wf;
  char_t ref_in;
  score_t up_in [2];
  tb_ptr_e tbp [2][N_PE];
  logic [N_PE-1:0] tb_we [2];
  logic last_we [2];
  logic [RW-1:0] last_col [2];
  score_t last_score [2];
  cand_t best [2][N_PE];

  localparam kernel_e KL [2] = '{K_GLOBAL_LINEAR, K_LOCAL_LINEAR};
  for (genvar k = 0; k < 2; k++) begin : g_dut
    dphls_pe_array #(.KERNEL(KL[k]), .N_PE(N_PE), .MAX_QUERY_LENGTH(MAXQ), .MAX_REFERENCE_LENGTH(MAXR)) dut (
      .clk, .rst_n, .params, .q_len, .r_len, .clear_best, .chunk_load, .row_base, .q_chunk,
      .init_left, .init_diag, .step, .wf, .ref_in, .up_in(up_in[k]), .tbp(tbp[k]), .tb_we(tb_we[k]),
      .last_we(last_we[k]), .last_col(last_col[k]), .last_score(last_score[k]), .best(best[k]));
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int H [2][MAXQ+1][MAXR+1];
  tb_ptr_e Pm [2][MAXQ+1][MAXR+1];
  int prb [2][MAXR+1];
  int seen [2][MAXQ+1][MAXR+1];

  task automatic trial(int ql, int rl);
    char_t q [MAXQ], r [MAXR];
    int nch, g;
    for (int x = 0; x < ql; x++) q[x] = char_t'($urandom);
    for (int x = 0; x < rl; x++) r[x] = ($urandom % 3 == 0) ? char_t'($urandom) : q[x % ql];
    g = int'(params.linear_gap);
    // reference fill
    for (int k = 0; k < 2; k++) begin
      for (int j = 0; j <= rl; j++) H[k][0][j] = (k == 0) ? j*g : 0;
      for (int i = 0; i <= ql; i++) H[k][i][0] = (k == 0) ? i*g : 0;
      for (int i = 1; i <= ql; i++)
        for (int j = 1; j <= rl; j++) begin
          int a, b, c, m; tb_ptr_e p;
          a = H[k][i][j-1] + g; b = H[k][i-1][j] + g;
          c = H[k][i-1][j-1] + ((q[i-1] == r[j-1]) ? int'(params.match) : int'(params.mismatch));
          m = a; p = TB_LEFT;
          if (c > m) begin m = c; p = TB_DIAG; end
          if (b > m) begin m = b; p = TB_UP; end
          if (k == 1 && m < 0) begin m = 0; p = TB_END; end
          H[k][i][j] = m; Pm[k][i][j] = p; seen[k][i][j] = 0;
        end
      for (int j = 1; j <= rl; j++) prb[k][j] = H[k][0][j];
    end
    q_len = QW'(ql); r_len = RW'(rl);
    clear_best = 1; @(posedge clk); #1; clear_best = 0;
    nch = (ql + N_PE - 1) / N_PE;
    for (int c = 0; c < nch; c++) begin
      row_base = QW'(c * N_PE);
      for (int p = 0; p < N_PE; p++) begin
        int i;
        i = c * N_PE + p + 1;
        q_chunk[p] = (i <= ql) ? q[i-1] : '0;
        init_left[p] = (i <= ql) ? score_t'(i * g) : '0;
        init_diag[p] = score_t'((i-1) * g);
      end
      chunk_load = 1;
      @(posedge clk); #1; chunk_load = 0;
      for (int w = 0; w < rl + N_PE - 1; w++) begin
        wf = WFW'(w);
        ref_in = (w < rl) ? r[w] : '0;
        for (int k = 0; k < 2; k++) up_in[k] = (w < rl) ? score_t'(prb[k][w+1]) : '0;
        step = 1;
        #1;
        for (int k = 0; k < 2; k++) begin
          for (int p = 0; p < N_PE; p++) begin
            int i, j;
            i = c * N_PE + p + 1; j = w - p + 1;
            if (tb_we[k][p]) begin
              check(i <= ql && j >= 1 && j <= rl, $sformatf("k%0d PE%0d writes outside matrix (%0d,%0d)", k, p, i, j));
              if (i <= ql && j >= 1 && j <= rl) begin
                seen[k][i][j]++;
                check(tbp[k][p] == Pm[k][i][j], $sformatf("k%0d cell (%0d,%0d) ptr %s exp %s", k, i, j, tbp[k][p].name(), Pm[k][i][j].name()));
              end
            end
          end
          if (last_we[k]) begin
            int i;
            i = c * N_PE + N_PE;
            check(int'(last_score[k]) == H[k][i][last_col[k]], $sformatf("k%0d last row %0d col %0d score %0d exp %0d", k, i, last_col[k], last_score[k], H[k][i][last_col[k]]));
            prb[k][last_col[k]] = int'(last_score[k]);
          end
        end
        @(posedge clk); #1;
        step = 0;
      end
    end
    for (int k = 0; k < 2; k++) begin
      for (int i = 1; i <= ql; i++)
        for (int j = 1; j <= rl; j++)
          check(seen[k][i][j] == 1, $sformatf("k%0d cell (%0d,%0d) written %0d times", k, i, j, seen[k][i][j]));
      for (int p = 0; p < N_PE; p++) begin
        int bs, bi, bj; bit f;
        f = 0; bs = 0; bi = 0; bj = 0;
        for (int i = p + 1; i <= ql; i += N_PE)
          for (int j = 1; j <= rl; j++)
            if ((k == 1 || (i == ql && j == rl)) && (!f || H[k][i][j] > bs)) begin f = 1; bs = H[k][i][j]; bi = i; bj = j; end
        check(best[k][p].valid == f && (!f || (int'(best[k][p].score) == bs && int'(best[k][p].row) == bi && int'(best[k][p].col) == bj)),
              $sformatf("k%0d PE%0d best %0d/%0d/%0d/%0d exp %0d/%0d/%0d/%0d", k, p, best[k][p].valid, best[k][p].score,
                        best[k][p].row, best[k][p].col, f, bs, bi, bj));
      end
    end
  endtask

  initial begin
    clear_best = 0; chunk_load = 0; step = 0; wf = '0; ref_in = '0; up_in[0] = '0; up_in[1] = '0;
    q_len = '0; r_len = '0; row_base = '0;
    for (int p = 0; p < N_PE; p++) begin q_chunk[p] = '0; init_left[p] = '0; init_diag[p] = '0; end
    params.match = 2; params.mismatch = -1; params.linear_gap = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // With linear_gap = 0 the global boundary is all zeros too, so both
    // arrays can share the chunk boundary inputs.
    trial(MAXQ, MAXR);
    trial(1, 1);
    trial(7, 11);
    for (int t = 0; t < 12; t++) begin
      params.match = score_t'(1 + $urandom % 3);
      params.mismatch = score_t'(-int'($urandom % 3));
      trial(1 + $urandom % MAXQ, 1 + $urandom % MAXR);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
