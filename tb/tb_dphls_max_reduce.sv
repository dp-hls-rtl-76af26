// tb_dphls_max_reduce: self-checking test of the best-cell reduction tree.
//
// Presents random candidate sets (with many equal scores and some invalid
// entries) for one cycle each and checks that the tree output, LEVELS =
// log2(N_PE) cycles later, is the best candidate found by a linear scan
// (higher score, then smaller row, then smaller column).
module tb_dphls_max_reduce;
  import dphls_pkg::*;

  localparam int N_PE = 16;
  localparam int LEVELS = $clog2(N_PE);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cand_t in_cand [N_PE];
  cand_t out_cand;
  cand_t expq [$];

  dphls_max_reduce #(.N_PE(N_PE)) dut (.clk, .rst_n, .in_cand, .out_cand);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic cand_t scan(cand_t c [N_PE]);
    cand_t b;
    b = '0;
    for (int p = 0; p < N_PE; p++) begin
      if (!c[p].valid) continue;
      if (!b.valid || c[p].score > b.score ||
          (c[p].score == b.score && (c[p].row < b.row || (c[p].row == b.row && c[p].col < b.col))))
        b = c[p];
    end
    return b;
  endfunction

  initial begin
    for (int p = 0; p < N_PE; p++) in_cand[p] = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int t = 0; t < 500 + LEVELS; t++) begin
      if (t < 500) begin
        for (int p = 0; p < N_PE; p++) begin
          in_cand[p].valid = ($urandom % 8) != 0 || (t % 50 == 0 && p == 3);
          if (t % 50 == 1) in_cand[p].valid = 0;   // nothing valid
          in_cand[p].score = score_t'(int'($urandom % 7) - 3);
          in_cand[p].row   = 16'($urandom % 5);
          in_cand[p].col   = 16'($urandom % 5);
        end
        expq.push_back(scan(in_cand));
      end
      @(posedge clk); #1;
      if (t >= LEVELS - 1 && expq.size() > 0) begin
        cand_t e;
        e = expq.pop_front();
        check(out_cand.valid == e.valid && (!e.valid ||
              (out_cand.score == e.score && out_cand.row == e.row && out_cand.col == e.col)),
              $sformatf("t%0d got %0d/%0d/%0d/%0d exp %0d/%0d/%0d/%0d", t, out_cand.valid, out_cand.score,
                        out_cand.row, out_cand.col, e.valid, e.score, e.row, e.col));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
