// tb_dphls_block: self-checking test of one alignment block.
//
// Four blocks are built, one per kernel (global, local, overlap,
// semi-global), with N_PE = 4 and 40-character buffers so that sequences
// span several query chunks, including a partial last chunk.  Each trial
// loads a random (partly similar) pair, runs the block and compares score,
// start cell, end cell, path length and every path entry with the reference
// model, and the start-to-done cycle count with the expected schedule:
// initialisation, then ceil(Q/N_PE) chunks of R + N_PE cycles (one
// wavefront per cycle), reduction, traceback.
module tb_dphls_block;
  import dphls_pkg::*;
  import dphls_ref_pkg::*;

  localparam int N_PE = 4;
  localparam int MAXQ = 40;
  localparam int MAXR = 40;
  localparam int QW = $clog2(MAXQ + 1);
  localparam int RW = $clog2(MAXR + 1);
  localparam int SAW = $clog2(MAXQ);
  localparam int PW = $clog2(MAXQ + MAXR + 1);
  localparam int NKER = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  scoring_params_t params;
  logic           seq_we [NKER];
  logic           seq_sel;
  logic [SAW-1:0] seq_addr;
  char_t          seq_data;
  logic [QW-1:0]  q_len;
  logic [RW-1:0]  r_len;
  logic           start [NKER];
  logic           busy [NKER], done [NKER];
  score_t         score [NKER];
  logic [QW-1:0]  si [NKER], ei [NKER];
  logic [RW-1:0]  sj [NKER], ej [NKER];
  logic [PW-1:0]  plen [NKER];
  logic [PW-1:0]  praddr;
  tb_move_e       pmove [NKER];

  localparam kernel_e KLIST [NKER] = '{K_GLOBAL_LINEAR, K_LOCAL_LINEAR, K_OVERLAP_LINEAR, K_SEMIGLOBAL_LINEAR};

  for (genvar k = 0; k < NKER; k++) begin : g_dut
    dphls_block #(.KERNEL(KLIST[k]), .N_PE(N_PE), .MAX_QUERY_LENGTH(MAXQ), .MAX_REFERENCE_LENGTH(MAXR)) dut (
      .clk, .rst_n, .params,
      .seq_we(seq_we[k]), .seq_sel, .seq_addr, .seq_data, .q_len, .r_len,
      .start(start[k]), .busy(busy[k]), .done(done[k]),
      .score(score[k]), .start_i(si[k]), .start_j(sj[k]), .end_i(ei[k]), .end_j(ej[k]),
      .path_len(plen[k]), .path_raddr(praddr), .path_rdata(pmove[k]));
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic run_one(int k, int ql, int rl, int sim);
    char_t q[], r[], none[];
    ref_result exp;
    int cyc;
    rand_seq(r, rl, none, 0);
    @(negedge clk);
    rand_seq(q, ql, r, sim);
    // load
    for (int x = 0; x < ql; x++) begin
      seq_we[k] = 1; seq_sel = 0; seq_addr = SAW'(x); seq_data = q[x]; @(posedge clk); #1;
    end
    for (int x = 0; x < rl; x++) begin
      seq_we[k] = 1; seq_sel = 1; seq_addr = SAW'(x); seq_data = r[x]; @(posedge clk); #1;
    end
    seq_we[k] = 0;
    q_len = QW'(ql); r_len = RW'(rl);
    start[k] = 1; @(posedge clk); #1; start[k] = 0;
    cyc = 1;
    while (!done[k]) begin
      @(posedge clk); #1; cyc++;
      if (cyc > 20000) break;
    end
    exp = align(KLIST[k], q, r, ql, rl, int'(params.match), int'(params.mismatch), int'(params.linear_gap));
    check(int'(score[k]) == wrap16(exp.score), $sformatf("k%0d %0dx%0d score %0d exp %0d", k, ql, rl, score[k], exp.score));
    check(int'(si[k]) == exp.si && int'(sj[k]) == exp.sj,
          $sformatf("k%0d start (%0d,%0d) exp (%0d,%0d)", k, si[k], sj[k], exp.si, exp.sj));
    check(int'(ei[k]) == exp.ei && int'(ej[k]) == exp.ej,
          $sformatf("k%0d end (%0d,%0d) exp (%0d,%0d)", k, ei[k], ej[k], exp.ei, exp.ej));
    check(int'(plen[k]) == exp.len, $sformatf("k%0d path_len %0d exp %0d", k, plen[k], exp.len));
    for (int x = 0; x <= exp.len && x < MAXQ + MAXR + 1; x++) begin
      tb_move_e e;
      praddr = PW'(x); #1;
      e = (x == exp.len) ? AL_END : exp.moves[x];
      check(pmove[k] == e, $sformatf("k%0d path[%0d] %s exp %s", k, x, pmove[k].name(), e.name()));
    end
    check(cyc == block_cycles(ql, rl, N_PE, exp.len),
          $sformatf("k%0d %0dx%0d cycles %0d exp %0d", k, ql, rl, cyc, block_cycles(ql, rl, N_PE, exp.len)));
  endtask

  initial begin
    for (int k = 0; k < NKER; k++) begin seq_we[k] = 0; start[k] = 0; end
    seq_sel = 0; seq_addr = '0; seq_data = '0; q_len = 1; r_len = 1; praddr = '0;
    params.match = 2; params.mismatch = -1; params.linear_gap = -2;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    @(posedge clk); #1;
    // fixed corner sizes, then random ones
    for (int k = 0; k < NKER; k++) begin
      run_one(k, 1, 1, 50);
      run_one(k, MAXQ, MAXR, 70);
      run_one(k, 4, 9, 50);
      run_one(k, 13, 5, 60);
      run_one(k, 8, 8, 100);
      for (int t = 0; t < 10; t++) begin
        params.match = score_t'(1 + $urandom % 4);
        params.mismatch = score_t'(-($urandom % 4));
        params.linear_gap = score_t'(-1 - $urandom % 3);
        run_one(k, 1 + $urandom % MAXQ, 1 + $urandom % MAXR, $urandom % 100);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
