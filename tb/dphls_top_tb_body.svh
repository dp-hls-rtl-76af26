// Body shared by the end-to-end testbenches of dphls_top.  The including
// module defines N_K, N_B, N_PE, MAXQ, MAXR, KERNEL, QLEN_MIN and
// SIZE_MODE and instantiates the top as 'dut'; this file holds the
// stimulus, the checks and the mechanism counters.
//
// Sequence pairs imitate noisy long reads: the query is the reference with
// about 10% substitutions, 10% deletions and 10% insertions.

  localparam int BW  = (N_B > 1) ? $clog2(N_B) : 1;
  localparam int QW  = $clog2(MAXQ + 1);
  localparam int RW  = $clog2(MAXR + 1);
  localparam int MAXL = (MAXQ > MAXR) ? MAXQ : MAXR;
  localparam int SAW = $clog2(MAXL);
  localparam int PW  = $clog2(MAXQ + MAXR + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  scoring_params_t params [N_K];
  logic            wr_en [N_K], wr_sel [N_K], job_en [N_K], start [N_K], busy [N_K], done [N_K];
  logic [BW-1:0]   wr_blk [N_K], job_blk [N_K], rd_blk [N_K];
  logic [SAW-1:0]  wr_addr [N_K];
  char_t           wr_data [N_K];
  logic [QW-1:0]   job_qlen [N_K], rd_si [N_K], rd_ei [N_K];
  logic [RW-1:0]   job_rlen [N_K], rd_sj [N_K], rd_ej [N_K];
  logic [PW-1:0]   rd_addr [N_K], rd_len [N_K];
  score_t          rd_score [N_K];
  tb_move_e        rd_move [N_K];

  // mechanism counters
  int n_multichunk = 0, n_partial_chunk = 0, n_mmi = 0, n_ins = 0, n_del = 0;
  int n_boundary = 0, n_idle_block = 0, n_concurrent = 0, n_results = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  char_t qs [N_K][N_B][], rs [N_K][N_B][];
  int    ql [N_K][N_B], rl [N_K][N_B];
  bit    has_job [N_K][N_B];

  function automatic void make_pair(int k, int b);
    char_t none[], q[$];
    int n;
    rl[k][b] = (SIZE_MODE == 1) ? MAXR : QLEN_MIN + $urandom % (MAXR - QLEN_MIN + 1);
    rand_seq(rs[k][b], rl[k][b], none, 0);
    for (int x = 0; x < rl[k][b]; x++) begin
      int u;
      u = $urandom % 100;
      if (u < 10) q.push_back(char_t'($urandom));           // substitution
      else if (u < 20) ;                                     // deletion
      else if (u < 30) begin q.push_back(char_t'($urandom)); q.push_back(rs[k][b][x]); end
      else q.push_back(rs[k][b][x]);
    end
    n = (SIZE_MODE == 1) ? MAXQ : QLEN_MIN + $urandom % (MAXQ - QLEN_MIN + 1);
    while (q.size() < n) q.push_back(char_t'($urandom));
    ql[k][b] = n;
    qs[k][b] = new[n];
    for (int x = 0; x < n; x++) qs[k][b][x] = q[x];
  endfunction

  task automatic load_kernel(int k);
    for (int b = 0; b < N_B; b++) begin
      has_job[k][b] = (SIZE_MODE == 1) || !(b == N_B - 1 && k == 0);
      make_pair(k, b);
      for (int x = 0; x < ql[k][b]; x++) begin
        wr_en[k] = 1; wr_blk[k] = BW'(b); wr_sel[k] = 0; wr_addr[k] = SAW'(x); wr_data[k] = qs[k][b][x];
        @(posedge clk); #1;
      end
      for (int x = 0; x < rl[k][b]; x++) begin
        wr_en[k] = 1; wr_blk[k] = BW'(b); wr_sel[k] = 1; wr_addr[k] = SAW'(x); wr_data[k] = rs[k][b][x];
        @(posedge clk); #1;
      end
      wr_en[k] = 0;
      job_en[k] = 1; job_blk[k] = BW'(b); job_qlen[k] = has_job[k][b] ? QW'(ql[k][b]) : '0; job_rlen[k] = RW'(rl[k][b]);
      @(posedge clk); #1;
      job_en[k] = 0;
    end
  endtask

  task automatic check_kernel(int k);
    for (int b = 0; b < N_B; b++) begin
      rd_blk[k] = BW'(b);
      #1;
      if (!has_job[k][b]) begin
        n_idle_block++;
        check(rd_len[k] == '0 && rd_score[k] == '0, $sformatf("k%0d b%0d ran without a job", k, b));
      end else begin
        ref_result e;
        e = align(KERNEL, qs[k][b], rs[k][b], ql[k][b], rl[k][b],
                  int'(params[k].match), int'(params[k].mismatch), int'(params[k].linear_gap));
        n_results++;
        if (ql[k][b] > N_PE) n_multichunk++;
        if (ql[k][b] % N_PE != 0) n_partial_chunk++;
        if (e.moves.size() > 0 && (e.ei != e.si || e.ej != e.sj)) begin
          // a global path that reaches row 0 or column 0 before the corner
          int i, j;
          i = e.si; j = e.sj;
          foreach (e.moves[x]) begin
            if ((i == 0) != (j == 0)) begin n_boundary++; break; end
            if (e.moves[x] != AL_INS) i--;
            if (e.moves[x] != AL_DEL) j--;
          end
        end
        foreach (e.moves[x]) begin
          if (e.moves[x] == AL_MMI) n_mmi++;
          if (e.moves[x] == AL_INS) n_ins++;
          if (e.moves[x] == AL_DEL) n_del++;
        end
        check(int'(rd_score[k]) == wrap16(e.score) && int'(rd_si[k]) == e.si && int'(rd_sj[k]) == e.sj &&
              int'(rd_ei[k]) == e.ei && int'(rd_ej[k]) == e.ej && int'(rd_len[k]) == e.len,
              $sformatf("k%0d b%0d %0dx%0d: %0d (%0d,%0d)-(%0d,%0d) len %0d, exp %0d (%0d,%0d)-(%0d,%0d) len %0d",
                        k, b, ql[k][b], rl[k][b], rd_score[k], rd_si[k], rd_sj[k], rd_ei[k], rd_ej[k], rd_len[k],
                        e.score, e.si, e.sj, e.ei, e.ej, e.len));
        for (int x = 0; x <= e.len; x++) begin
          rd_addr[k] = PW'(x); #1;
          check(rd_move[k] == ((x == e.len) ? AL_END : e.moves[x]), $sformatf("k%0d b%0d path[%0d]", k, b, x));
        end
      end
    end
  endtask

  initial begin
    int cyc;
    for (int k = 0; k < N_K; k++) begin
      wr_en[k] = 0; wr_sel[k] = 0; job_en[k] = 0; start[k] = 0; wr_blk[k] = '0; job_blk[k] = '0; rd_blk[k] = '0;
      wr_addr[k] = '0; wr_data[k] = '0; job_qlen[k] = '0; job_rlen[k] = '0; rd_addr[k] = '0;
      // linear scoring; each channel gets its own parameters
      params[k].match = score_t'(2); params[k].mismatch = score_t'(-1 - k % 2); params[k].linear_gap = score_t'(-2);
    end
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // all channels load at the same time, as independent host threads would
    for (int k = 0; k < N_K; k++) begin
      fork
        automatic int kk = k;
        load_kernel(kk);
      join_none
    end
    wait fork;
    @(negedge clk);
    for (int k = 0; k < N_K; k++) start[k] = 1;
    @(posedge clk); #1;
    for (int k = 0; k < N_K; k++) start[k] = 0;
    cyc = 1;
    begin
      bit all_done;
      bit seen_done [N_K];
      for (int k = 0; k < N_K; k++) seen_done[k] = 0;
      all_done = 0;
      while (!all_done) begin
        int nb;
        nb = 0;
        for (int k = 0; k < N_K; k++) begin
          if (busy[k]) nb++;
          if (done[k]) seen_done[k] = 1;
        end
        if (nb > 1) n_concurrent++;
        all_done = 1;
        for (int k = 0; k < N_K; k++) all_done &= seen_done[k];
        @(posedge clk); #1; cyc++;
      end
    end
    $display("all kernels done after %0d cycles", cyc);
    for (int k = 0; k < N_K; k++) check_kernel(k);
    $display("mechanisms: results=%0d multichunk=%0d partial_chunk=%0d mmi=%0d ins=%0d del=%0d boundary=%0d idle_block=%0d concurrent_cycles=%0d",
             n_results, n_multichunk, n_partial_chunk, n_mmi, n_ins, n_del, n_boundary, n_idle_block, n_concurrent);
    check(n_results > 0, "no alignment result");
    check(n_multichunk > 0, "no multi-chunk alignment (row buffer carry)");
    check(n_mmi > 0 && n_ins > 0 && n_del > 0, "not every traceback move occurred");
    check(n_concurrent > 0, "kernels never ran concurrently");
    if (SIZE_MODE == 0) begin
      check(n_partial_chunk > 0, "no partial last chunk");
      check(n_boundary > 0, "no traceback along the matrix border");
      check(n_idle_block > 0, "no block left without a job");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
