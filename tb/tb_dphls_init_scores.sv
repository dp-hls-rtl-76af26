// tb_dphls_init_scores: self-checking test of the initial-score generator.
//
// Runs the global generator (k * gap) and the local one (all zeros) for
// several counts and gaps, checking every index/score pair, that exactly
// 'count' outputs appear on consecutive cycles, and the done pulse.
module tb_dphls_init_scores;
  import dphls_pkg::*;

  localparam int MAXL = 64;
  localparam int IW = $clog2(MAXL + 2);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start;
  logic [IW-1:0] count;
  score_t gap;
  logic v_g, v_l, d_g, d_l;
  logic [IW-1:0] i_g, i_l;
  score_t s_g, s_l;

  dphls_init_scores #(.KERNEL(K_GLOBAL_LINEAR), .MAX_LEN(MAXL)) dut_g (.clk, .rst_n, .start, .count, .gap,
    .valid(v_g), .idx(i_g), .score(s_g), .done(d_g));
  dphls_init_scores #(.KERNEL(K_LOCAL_LINEAR), .MAX_LEN(MAXL)) dut_l (.clk, .rst_n, .start, .count, .gap,
    .valid(v_l), .idx(i_l), .score(s_l), .done(d_l));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic run(int n, int g);
    int seen;
    count = IW'(n); gap = score_t'(g);
    start = 1; @(posedge clk); #1; start = 0;
    seen = 0;
    while (v_g) begin
      check(int'(i_g) == seen && int'(s_g) == seen * g, $sformatf("global idx %0d score %0d exp %0d/%0d", i_g, s_g, seen, seen*g));
      check(v_l && int'(i_l) == seen && s_l == 0, $sformatf("local idx %0d score %0d", i_l, s_l));
      check(!d_g, "done during valid");
      seen++;
      @(posedge clk); #1;
      if (seen > MAXL + 2) break;
    end
    check(seen == n, $sformatf("count %0d exp %0d", seen, n));
    check(d_g && d_l, "done pulse after last output");
    @(posedge clk); #1;
    check(!d_g && !v_g, "done lasts one cycle");
  endtask

  initial begin
    start = 0; count = '0; gap = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    run(1, -1);
    run(5, -2);
    run(MAXL + 1, -3);
    for (int t = 0; t < 10; t++) run(1 + $urandom % (MAXL + 1), -int'($urandom % 5));
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
