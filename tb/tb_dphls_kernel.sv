// tb_dphls_kernel: self-checking test of a kernel (N_B blocks + arbiter).
//
// Loads different random pairs into some of the blocks through the shared
// channel, leaves others without a job, starts them together and checks:
// done comes once, after the longest job, with busy high until then; a
// block without a job is not started; writes while busy are ignored; every
// result and path entry read back through the multiplexer matches the
// reference model; and a second start re-runs the same jobs.
module tb_dphls_kernel;
  import dphls_pkg::*;
  import dphls_ref_pkg::*;

  localparam int N_B = 4;
  localparam int N_PE = 4;
  localparam int MAXQ = 24;
  localparam int MAXR = 24;
  localparam int BW = $clog2(N_B);
  localparam int QW = $clog2(MAXQ + 1);
  localparam int RW = $clog2(MAXR + 1);
  localparam int SAW = $clog2(MAXQ);
  localparam int PW = $clog2(MAXQ + MAXR + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  scoring_params_t params;
  logic wr_en, wr_sel, job_en, start, busy, done;
  logic [BW-1:0] wr_blk, job_blk, rd_blk;
  logic [SAW-1:0] wr_addr;
  char_t wr_data;
  logic [QW-1:0] job_qlen, rd_si, rd_ei;
  logic [RW-1:0] job_rlen, rd_sj, rd_ej;
  logic [PW-1:0] rd_addr, rd_len;
  score_t rd_score;
  tb_move_e rd_move;

  dphls_kernel #(.KERNEL(K_LOCAL_LINEAR), .N_B(N_B), .N_PE(N_PE), .MAX_QUERY_LENGTH(MAXQ), .MAX_REFERENCE_LENGTH(MAXR)) dut (
    .clk, .rst_n, .params, .wr_en, .wr_blk, .wr_sel, .wr_addr, .wr_data, .job_en, .job_blk, .job_qlen, .job_rlen,
    .start, .busy, .done, .rd_blk, .rd_addr, .rd_score, .rd_start_i(rd_si), .rd_start_j(rd_sj),
    .rd_end_i(rd_ei), .rd_end_j(rd_ej), .rd_path_len(rd_len), .rd_move);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  char_t qs [N_B][], rs [N_B][];
  int ql [N_B], rl [N_B];
  bit has_job [N_B];

  task automatic write_seq(int b, bit sel, char_t s[]);
    for (int x = 0; x < s.size(); x++) begin
      wr_en = 1; wr_blk = BW'(b); wr_sel = sel; wr_addr = SAW'(x); wr_data = s[x];
      @(posedge clk); #1;
    end
    wr_en = 0;
  endtask

  task automatic run_and_check(int round);
    int cyc, ndone, maxc;
    @(negedge clk);
    start = 1; @(posedge clk); #1; start = 0;
    cyc = 1; ndone = 0;
    check(busy, "busy after start");
    // a write while busy must be ignored: corrupt block 0's query
    wr_en = 1; wr_blk = '0; wr_sel = 0; wr_addr = '0; wr_data = ~qs[0][0];
    @(posedge clk); #1; wr_en = 0; cyc++;
    while (!done && cyc < 10000) begin @(posedge clk); #1; cyc++; end
    check(done, "done pulse");
    @(posedge clk); #1;
    check(!busy && !done, "idle one cycle after done");
    // done comes after the longest job: compare with the block schedule
    maxc = 0;
    for (int b = 0; b < N_B; b++) if (has_job[b]) begin
      ref_result e;
      int c;
      e = align(K_LOCAL_LINEAR, qs[b], rs[b], ql[b], rl[b], int'(params.match), int'(params.mismatch), int'(params.linear_gap));
      c = block_cycles(ql[b], rl[b], N_PE, e.len) + 1;
      if (c > maxc) maxc = c;
      rd_blk = BW'(b);
      #1;
      check(int'(rd_score) == e.score && int'(rd_si) == e.si && int'(rd_sj) == e.sj &&
            int'(rd_ei) == e.ei && int'(rd_ej) == e.ej && int'(rd_len) == e.len,
            $sformatf("round %0d block %0d result %0d (%0d,%0d)-(%0d,%0d) len %0d exp %0d (%0d,%0d)-(%0d,%0d) len %0d",
                      round, b, rd_score, rd_si, rd_sj, rd_ei, rd_ej, rd_len, e.score, e.si, e.sj, e.ei, e.ej, e.len));
      for (int x = 0; x <= e.len; x++) begin
        rd_addr = PW'(x); #1;
        check(rd_move == ((x == e.len) ? AL_END : e.moves[x]), $sformatf("block %0d path[%0d]", b, x));
      end
    end else begin
      rd_blk = BW'(b); #1;
      check(rd_len == '0 && rd_score == '0, $sformatf("block %0d without job produced a result", b));
    end
    check(cyc == maxc, $sformatf("round %0d kernel cycles %0d exp %0d", round, cyc, maxc));
  endtask

  initial begin
    wr_en = 0; wr_sel = 0; wr_blk = '0; wr_addr = '0; wr_data = '0; job_en = 0; job_blk = '0;
    job_qlen = '0; job_rlen = '0; start = 0; rd_blk = '0; rd_addr = '0;
    params.match = 3; params.mismatch = -2; params.linear_gap = -2;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int b = 0; b < N_B; b++) begin
      char_t none[];
      has_job[b] = (b != 2);
      ql[b] = (b == 1) ? MAXQ : 1 + $urandom % MAXQ;
      rl[b] = (b == 1) ? MAXR : 1 + $urandom % MAXR;
      rand_seq(rs[b], rl[b], none, 0);
      rand_seq(qs[b], ql[b], rs[b], 60);
      write_seq(b, 0, qs[b]);
      write_seq(b, 1, rs[b]);
      job_en = 1; job_blk = BW'(b); job_qlen = has_job[b] ? QW'(ql[b]) : '0; job_rlen = RW'(rl[b]);
      @(posedge clk); #1; job_en = 0;
    end
    run_and_check(0);
    run_and_check(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
