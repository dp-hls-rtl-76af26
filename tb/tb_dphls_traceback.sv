// tb_dphls_traceback: self-checking test of the traceback FSM.
//
// A random pointer matrix is laid out in a model of the banked traceback
// memory (bank (i-1) mod N_PE, address chunk*(R+N_PE-1) + (j-1) + bank) and
// four FSMs, one per kernel, walk it from random start cells.  Each path
// entry, the path length, the end cell and the start-to-done latency
// (path_len + 4 cycles) are compared with a walk over the plain matrix.
module tb_dphls_traceback;
  import dphls_pkg::*;
  import dphls_ref_pkg::*;

  localparam int N_PE = 4;
  localparam int MAXQ = 24;
  localparam int MAXR = 24;
  localparam int NCH = (MAXQ + N_PE - 1) / N_PE;
  localparam int DEPTH = NCH * (MAXR + N_PE - 1);
  localparam int QW = $clog2(MAXQ + 1);
  localparam int RW = $clog2(MAXR + 1);
  localparam int PW = $clog2(MAXQ + MAXR + 1);
  localparam int AW = $clog2(DEPTH);
  localparam int NKER = 4;
  localparam kernel_e KLIST [NKER] = '{K_GLOBAL_LINEAR, K_LOCAL_LINEAR, K_OVERLAP_LINEAR, K_SEMIGLOBAL_LINEAR};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  tb_ptr_e tbm [N_PE][DEPTH];
  tb_ptr_e P [MAXQ+1][MAXR+1];

  logic          start [NKER];
  logic [QW-1:0] start_i;
  logic [RW-1:0] start_j, r_len;
  logic [$clog2(N_PE)-1:0] rbank [NKER];
  logic [AW-1:0] raddr [NKER];
  tb_ptr_e       rdata [NKER];
  logic          pwe [NKER], busy [NKER], done [NKER];
  logic [PW-1:0] paddr [NKER], plen [NKER];
  tb_move_e      pmove [NKER];
  logic [QW-1:0] end_i [NKER];
  logic [RW-1:0] end_j [NKER];
  tb_move_e      path [NKER][MAXQ+MAXR+1];

  for (genvar k = 0; k < NKER; k++) begin : g_dut
    dphls_traceback #(.KERNEL(KLIST[k]), .N_PE(N_PE), .MAX_QUERY_LENGTH(MAXQ), .MAX_REFERENCE_LENGTH(MAXR)) dut (
      .clk, .rst_n, .start(start[k]), .start_i, .start_j, .r_len,
      .rbank(rbank[k]), .raddr(raddr[k]), .rdata(rdata[k]),
      .path_we(pwe[k]), .path_addr(paddr[k]), .path_move(pmove[k]),
      .busy(busy[k]), .done(done[k]), .end_i(end_i[k]), .end_j(end_j[k]), .path_len(plen[k]));
    assign rdata[k] = tbm[rbank[k]][raddr[k]];
    always @(posedge clk) if (pwe[k]) path[k][paddr[k]] <= pmove[k];
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic trial(int k, int ql, int rl, int si, int sj);
    int i, j, n, cyc;
    tb_move_e exp [$];
    @(negedge clk);
    for (i = 1; i <= ql; i++)
      for (j = 1; j <= rl; j++) begin
        int c, p;
        // global paths never meet TB_END inside the matrix
        P[i][j] = tb_ptr_e'($urandom % ((KLIST[k] == K_LOCAL_LINEAR) ? 4 : 3));
        if (KLIST[k] == K_LOCAL_LINEAR && ($urandom % 6) != 0 && P[i][j] == TB_END) P[i][j] = TB_DIAG;
        c = (i-1) / N_PE; p = (i-1) % N_PE;
        tbm[p][c*(rl+N_PE-1) + (j-1) + p] = P[i][j];
      end
    // reference walk
    i = si; j = sj;
    forever begin
      tb_move_e mv;
      case (KLIST[k])
        K_GLOBAL_LINEAR:     mv = (i==0 && j==0) ? AL_END : (i==0) ? AL_INS : (j==0) ? AL_DEL : ptr2move(P[i][j]);
        K_SEMIGLOBAL_LINEAR: mv = (i==0) ? AL_END : (j==0) ? AL_DEL : ptr2move(P[i][j]);
        default:             mv = (i==0 || j==0) ? AL_END : ptr2move(P[i][j]);
      endcase
      if (mv == AL_END) break;
      exp.push_back(mv);
      if (mv != AL_INS) i--;
      if (mv != AL_DEL) j--;
    end
    start_i = QW'(si); start_j = RW'(sj); r_len = RW'(rl);
    start[k] = 1; @(posedge clk); #1; start[k] = 0;
    cyc = 1;
    while (!done[k] && cyc < 1000) begin @(posedge clk); #1; cyc++; end
    n = exp.size();
    check(int'(plen[k]) == n, $sformatf("k%0d len %0d exp %0d", k, plen[k], n));
    check(int'(end_i[k]) == i && int'(end_j[k]) == j, $sformatf("k%0d end (%0d,%0d) exp (%0d,%0d)", k, end_i[k], end_j[k], i, j));
    check(cyc == n + 4, $sformatf("k%0d latency %0d exp %0d", k, cyc, n + 4));
    for (int x = 0; x <= n; x++) begin
      tb_move_e e;
      e = (x == n) ? AL_END : exp[x];
      check(path[k][x] == e, $sformatf("k%0d path[%0d] %s exp %s", k, x, path[k][x].name(), e.name()));
    end
  endtask

  initial begin
    for (int k = 0; k < NKER; k++) start[k] = 0;
    start_i = '0; start_j = '0; r_len = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int k = 0; k < NKER; k++) begin
      trial(k, MAXQ, MAXR, MAXQ, MAXR);
      trial(k, 5, 3, 5, 3);
      for (int t = 0; t < 25; t++) begin
        int ql, rl;
        ql = 1 + $urandom % MAXQ; rl = 1 + $urandom % MAXR;
        trial(k, ql, rl, 1 + $urandom % ql, 1 + $urandom % rl);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
