// dphls_ref_pkg: software reference model for the testbenches.
//
// Fills the whole DP matrix row by row with plain integer arithmetic and
// then walks the traceback, independently of the hardware's chunking,
// wavefront order, banked memory and reduction tree.  Tie rules follow the
// kernel definition: cell max/pointer in the order left, diag, up, zero;
// best start cell = highest score, first in row-major order.
package dphls_ref_pkg;
  import dphls_pkg::*;

  class ref_result;
    int       score;
    int       si, sj, ei, ej;
    int       len;
    tb_move_e moves[$];
  endclass

  // 16-bit wrap of an integer score, as the hardware holds it.
  function automatic int wrap16(int v);
    return int'(score_t'(v));
  endfunction

  function automatic ref_result align(kernel_e k, char_t q[], char_t r[], int ql, int rl,
                                      int match, int mismatch, int gap);
    ref_result res = new();
    int H[][];
    tb_ptr_e P[][];
    int best, bi, bj;
    bit found;
    int i, j;
    H = new[ql+1];
    P = new[ql+1];
    for (i = 0; i <= ql; i++) begin
      H[i] = new[rl+1];
      P[i] = new[rl+1];
    end
    for (j = 0; j <= rl; j++) H[0][j] = (k == K_GLOBAL_LINEAR) ? j*gap : 0;
    for (i = 0; i <= ql; i++) H[i][0] = (k == K_GLOBAL_LINEAR) ? i*gap : 0;
    found = 0; best = 0; bi = 0; bj = 0;
    for (i = 1; i <= ql; i++) begin
      for (j = 1; j <= rl; j++) begin
        int ins, del, mt, m;
        tb_ptr_e p;
        ins = H[i][j-1] + gap;
        del = H[i-1][j] + gap;
        mt  = H[i-1][j-1] + ((q[i-1] == r[j-1]) ? match : mismatch);
        m = ins; p = TB_LEFT;
        if (m < mt)  begin m = mt;  p = TB_DIAG; end
        if (m < del) begin m = del; p = TB_UP;   end
        if (k == K_LOCAL_LINEAR && m < 0) begin m = 0; p = TB_END; end
        H[i][j] = m; P[i][j] = p;
        if (start_ok(k, i, j, ql, rl) && (!found || m > best)) begin
          found = 1; best = m; bi = i; bj = j;
        end
      end
    end
    res.score = best; res.si = bi; res.sj = bj;
    i = bi; j = bj;
    forever begin
      tb_move_e mv;
      mv = AL_END;
      case (k)
        K_GLOBAL_LINEAR:
          if (i == 0 && j == 0) mv = AL_END;
          else if (i == 0) mv = AL_INS;
          else if (j == 0) mv = AL_DEL;
          else mv = ptr2move(P[i][j]);
        K_SEMIGLOBAL_LINEAR:
          if (i == 0) mv = AL_END;
          else if (j == 0) mv = AL_DEL;
          else mv = ptr2move(P[i][j]);
        default:
          if (i == 0 || j == 0) mv = AL_END;
          else mv = ptr2move(P[i][j]);
      endcase
      if (mv == AL_END) break;
      res.moves.push_back(mv);
      if (mv != AL_INS) i--;
      if (mv != AL_DEL) j--;
    end
    res.len = res.moves.size();
    res.ei = i; res.ej = j;
    return res;
  endfunction

  function automatic bit start_ok(kernel_e k, int i, int j, int ql, int rl);
    case (k)
      K_GLOBAL_LINEAR:     return i == ql && j == rl;
      K_LOCAL_LINEAR:      return 1;
      K_OVERLAP_LINEAR:    return i == ql || j == rl;
      default:             return i == ql;
    endcase
  endfunction

  function automatic tb_move_e ptr2move(tb_ptr_e p);
    case (p)
      TB_DIAG: return AL_MMI;
      TB_UP:   return AL_DEL;
      TB_LEFT: return AL_INS;
      default: return AL_END;
    endcase
  endfunction

  // Random sequence; with probability 'sim' percent a character copies the
  // corresponding character of 'base' (to get realistic, related pairs).
  function automatic void rand_seq(ref char_t s[], input int n, input char_t base[], input int sim);
    s = new[n];
    for (int x = 0; x < n; x++) begin
      if (base.size() > x && ($urandom % 100) < sim) s[x] = base[x];
      else s[x] = char_t'($urandom);
    end
  endfunction

  // Expected cycles from start to done of one block (see dphls_block).
  function automatic int block_cycles(int ql, int rl, int n_pe, int path_len);
    int chunks, levels, mx;
    chunks = (ql + n_pe - 1) / n_pe;
    levels = $clog2(n_pe);
    mx = (ql > rl) ? ql : rl;
    return (mx + 3) + chunks * (rl + n_pe) + (levels + 1) + (path_len + 5);
  endfunction

endpackage
