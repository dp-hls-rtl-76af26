// tb_dphls_pe: self-checking test of the processing element.
//
// Drives random neighbour scores, characters and scoring parameters into a
// global-kernel PE and a local-kernel PE and compares score and pointer with
// a recomputation of the recurrence, including forced ties (left = diagonal
// = up candidates) and negative results that the local PE must clamp to 0.
module tb_dphls_pe;
  import dphls_pkg::*;

  int checks = 0, failures = 0;

  scoring_params_t params;
  char_t  qry, ref_c;
  score_t up, diag, left;
  score_t s_g, s_l;
  tb_ptr_e t_g, t_l;

  dphls_pe #(.KERNEL(K_GLOBAL_LINEAR)) dut_g (.params, .qry, .ref_c, .up, .diag, .left, .score(s_g), .tbp(t_g));
  dphls_pe #(.KERNEL(K_LOCAL_LINEAR))  dut_l (.params, .qry, .ref_c, .up, .diag, .left, .score(s_l), .tbp(t_l));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic one();
    int ins, del, mt, m, ml;
    tb_ptr_e p, pl;
    #1;
    ins = int'(left) + int'(params.linear_gap);
    del = int'(up) + int'(params.linear_gap);
    mt  = int'(diag) + ((qry == ref_c) ? int'(params.match) : int'(params.mismatch));
    // reference: pick the maximum; ties prefer left, then diagonal, then up
    m = ins; p = TB_LEFT;
    if (mt > m) begin m = mt; p = TB_DIAG; end
    if (del > m) begin m = del; p = TB_UP; end
    ml = m; pl = p;
    if (ml < 0) begin ml = 0; pl = TB_END; end
    check(int'(s_g) == m && t_g == p, $sformatf("global: l%0d d%0d u%0d -> %0d/%s exp %0d/%s", left, diag, up, s_g, t_g.name(), m, p.name()));
    check(int'(s_l) == ml && t_l == pl, $sformatf("local: -> %0d/%s exp %0d/%s", s_l, t_l.name(), ml, pl.name()));
  endtask

  initial begin
    for (int t = 0; t < 3000; t++) begin
      params.match      = score_t'($urandom % 5);
      params.mismatch   = score_t'(-int'($urandom % 5));
      params.linear_gap = score_t'(-int'($urandom % 4));
      qry   = char_t'($urandom);
      ref_c = (t % 3 == 0) ? qry : char_t'($urandom);
      up    = score_t'(int'($urandom % 41) - 20);
      diag  = score_t'(int'($urandom % 41) - 20);
      left  = score_t'(int'($urandom % 41) - 20);
      if (t % 7 == 0) begin            // force a three-way tie of candidates
        left = diag + ((qry == ref_c) ? params.match : params.mismatch) - params.linear_gap;
        up   = left;
      end
      one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
