// dphls_block: one alignment block -- aligns one query/reference pair.
//
// It holds the block's input buffers (query and reference characters),
// the initial column scores, the preserved row buffer, the systolic PE
// array, the banked traceback memory, the best-cell reduction tree, the
// traceback FSM and the output path buffer, and sequences them:
//
//   INIT    the initial-score generator runs k = 0..max(Q,R); score k goes
//           to row-buffer entry k-1 (k = 1..R) and to init_col[k] (k <= Q).
//   LOAD    chunk c: PE p gets query char q[c*N_PE+p] and its boundary scores
//           init_col[c*N_PE+p+1] (left) and init_col[c*N_PE+p] (diagonal).
//   WAVE    R + N_PE - 1 wavefronts, one per cycle.  PE0 reads the row
//           buffer, the last PE writes it; every PE that scores a cell
//           stores its pointer at TB address c*(R+N_PE-1) + wf.
//           Then the next chunk (LOAD) or, after the last chunk, REDUCE.
//   REDUCE  waits for the reduction tree to combine the per-PE best cells.
//   TRACE   the traceback FSM walks from the best cell and fills the path.
//   DONE    results are registered, done pulses.
// The phases do not overlap (initialisation and query loading are not
// hidden behind computation).
//
// Interface: characters are written through seq_we/seq_sel/seq_addr/
// seq_data (sel 0 = query, 1 = reference, address 0 = first character)
// while the block is idle.  q_len and r_len (1..MAX) and params must be
// stable from start to done.  After done: score, start cell (start_i,
// start_j), end cell (end_i, end_j), path_len, and the path moves readable
// at path_raddr (entry 0 is the move out of the start cell; entry path_len
// is AL_END).
//
// Cycles from start to done:
//   (max(Q,R) + 3) + ceil(Q/N_PE) * (R + N_PE) + (LEVELS + 1) + (path_len + 5)
// with LEVELS = log2(N_PE); see the testbench for the exact derivation.
module dphls_block
  import dphls_pkg::*;
#(
  parameter kernel_e KERNEL               = K_GLOBAL_LINEAR,
  parameter int      N_PE                 = 64,
  parameter int      MAX_QUERY_LENGTH     = 256,
  parameter int      MAX_REFERENCE_LENGTH = 256,
  localparam int     QW    = $clog2(MAX_QUERY_LENGTH + 1),
  localparam int     RW    = $clog2(MAX_REFERENCE_LENGTH + 1),
  localparam int     MAXL  = (MAX_QUERY_LENGTH > MAX_REFERENCE_LENGTH) ? MAX_QUERY_LENGTH : MAX_REFERENCE_LENGTH,
  localparam int     SAW   = $clog2(MAXL),
  localparam int     PLEN  = MAX_QUERY_LENGTH + MAX_REFERENCE_LENGTH + 1,
  localparam int     PW    = $clog2(PLEN)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  scoring_params_t params,
  // input buffers
  input  logic            seq_we,
  input  logic            seq_sel,
  input  logic [SAW-1:0]  seq_addr,
  input  char_t           seq_data,
  input  logic [QW-1:0]   q_len,
  input  logic [RW-1:0]   r_len,
  // control
  input  logic            start,
  output logic            busy,
  output logic            done,
  // results
  output score_t          score,
  output logic [QW-1:0]   start_i,
  output logic [RW-1:0]   start_j,
  output logic [QW-1:0]   end_i,
  output logic [RW-1:0]   end_j,
  output logic [PW-1:0]   path_len,
  input  logic [PW-1:0]   path_raddr,
  output tb_move_e        path_rdata
);

  localparam int LEVELS = $clog2(N_PE);
  localparam int NCHUNK = (MAX_QUERY_LENGTH + N_PE - 1) / N_PE;
  localparam int DEPTH  = NCHUNK * (MAX_REFERENCE_LENGTH + N_PE - 1);
  localparam int AW     = $clog2(DEPTH);
  localparam int WFW    = $clog2(MAX_REFERENCE_LENGTH + N_PE);
  localparam int IW     = $clog2(MAXL + 2);

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_LOAD, S_WAVE, S_REDUCE, S_TRACE, S_DONE} state_e;
  state_e state;

  // ---------------- input buffers and initial column ----------------
  char_t  q_mem [MAX_QUERY_LENGTH];
  char_t  r_mem [MAX_REFERENCE_LENGTH];
  score_t init_col [MAX_QUERY_LENGTH + 1];

  always_ff @(posedge clk) begin
    if (seq_we && state == S_IDLE) begin
      if (!seq_sel) begin
        if (32'(seq_addr) < MAX_QUERY_LENGTH) q_mem[seq_addr] <= seq_data;
      end else begin
        if (32'(seq_addr) < MAX_REFERENCE_LENGTH) r_mem[seq_addr] <= seq_data;
      end
    end
  end

  // ---------------- initial scores ----------------
  logic          init_start, init_valid, init_done;
  logic [IW-1:0] init_idx;
  score_t        init_score;
  logic [IW-1:0] init_count;

  assign init_count = (IW'(q_len) > IW'(r_len)) ? IW'(q_len) + 1'b1 : IW'(r_len) + 1'b1;
  assign init_start = (state == S_IDLE) && start;

  dphls_init_scores #(.KERNEL(KERNEL), .MAX_LEN(MAXL)) u_init (
    .clk, .rst_n,
    .start (init_start),
    .count (init_count),
    .gap   (params.linear_gap),
    .valid (init_valid),
    .idx   (init_idx),
    .score (init_score),
    .done  (init_done)
  );

  always_ff @(posedge clk) begin
    if (init_valid && (32'(init_idx) <= MAX_QUERY_LENGTH) && (init_idx <= IW'(q_len)))
      init_col[init_idx] <= init_score;
  end

  // ---------------- chunk / wavefront loop counters ----------------
  logic [QW-1:0]  row_base;     // c * N_PE
  logic [WFW-1:0] wf;
  logic [AW-1:0]  tb_base;      // c * (R + N_PE - 1)
  logic [WFW-1:0] wf_last;      // R + N_PE - 2
  logic [3:0]     red_cnt;

  assign wf_last = WFW'(r_len) + WFW'(N_PE - 2);

  // ---------------- preserved row buffer ----------------
  logic        prb_we;
  logic [$clog2(MAX_REFERENCE_LENGTH)-1:0] prb_waddr, prb_raddr;
  score_t      prb_wdata, prb_rdata;

  logic            pa_last_we;
  logic [RW-1:0]   pa_last_col;
  score_t          pa_last_score;

  always_comb begin
    if (state == S_INIT) begin
      prb_we    = init_valid && (init_idx != '0) && (init_idx <= IW'(r_len));
      prb_waddr = $bits(prb_waddr)'(init_idx - 1'b1);
      prb_wdata = init_score;
    end else begin
      prb_we    = pa_last_we;
      prb_waddr = $bits(prb_waddr)'(pa_last_col - 1'b1);
      prb_wdata = pa_last_score;
    end
    prb_raddr = $bits(prb_raddr)'(wf);
  end

  dphls_row_buffer #(.MAX_REFERENCE_LENGTH(MAX_REFERENCE_LENGTH)) u_prb (
    .clk, .we(prb_we), .waddr(prb_waddr), .wdata(prb_wdata),
    .raddr(prb_raddr), .rdata(prb_rdata)
  );

  // ---------------- PE array ----------------
  char_t   q_chunk   [N_PE];
  score_t  init_left [N_PE];
  score_t  init_diag [N_PE];
  tb_ptr_e pa_tbp    [N_PE];
  logic [N_PE-1:0] pa_tb_we;
  cand_t   pa_best   [N_PE];
  char_t   ref_in;

  always_comb begin
    for (int p = 0; p < N_PE; p++) begin
      int r;
      r = int'(row_base) + p;            // 0-based query index of PE p's row
      q_chunk[p]   = (r < MAX_QUERY_LENGTH) ? q_mem[r] : '0;
      init_left[p] = (r + 1 <= MAX_QUERY_LENGTH) ? init_col[r + 1] : '0;
      init_diag[p] = (r <= MAX_QUERY_LENGTH) ? init_col[r] : '0;
    end
    ref_in = (32'(wf) < MAX_REFERENCE_LENGTH && wf < WFW'(r_len)) ?
             r_mem[$clog2(MAX_REFERENCE_LENGTH)'(wf)] : '0;
  end

  dphls_pe_array #(
    .KERNEL(KERNEL), .N_PE(N_PE),
    .MAX_QUERY_LENGTH(MAX_QUERY_LENGTH), .MAX_REFERENCE_LENGTH(MAX_REFERENCE_LENGTH)
  ) u_array (
    .clk, .rst_n, .params, .q_len, .r_len,
    .clear_best (init_start),
    .chunk_load (state == S_LOAD),
    .row_base   (row_base),
    .q_chunk, .init_left, .init_diag,
    .step       (state == S_WAVE),
    .wf         (wf),
    .ref_in     (ref_in),
    .up_in      (prb_rdata),
    .tbp        (pa_tbp),
    .tb_we      (pa_tb_we),
    .last_we    (pa_last_we),
    .last_col   (pa_last_col),
    .last_score (pa_last_score),
    .best       (pa_best)
  );

  // ---------------- traceback memory ----------------
  logic [LEVELS-1:0] tm_rbank;
  logic [AW-1:0]     tm_raddr;
  tb_ptr_e           tm_rdata;

  dphls_tb_mem #(.N_PE(N_PE), .DEPTH(DEPTH)) u_tbmem (
    .clk,
    .we    (pa_tb_we),
    .waddr (tb_base + AW'(wf)),
    .wdata (pa_tbp),
    .rbank (tm_rbank),
    .raddr (tm_raddr),
    .rdata (tm_rdata)
  );

  // ---------------- best-cell reduction ----------------
  cand_t best;

  dphls_max_reduce #(.N_PE(N_PE)) u_reduce (
    .clk, .rst_n, .in_cand(pa_best), .out_cand(best)
  );

  // ---------------- traceback ----------------
  logic          tb_start, tb_done, tb_busy;
  logic          path_we;
  logic [PW-1:0] path_waddr, tb_len;
  tb_move_e      path_wmove;
  logic [QW-1:0] tb_end_i;
  logic [RW-1:0] tb_end_j;
  tb_move_e      path_mem [PLEN];

  assign tb_start = (state == S_REDUCE) && (red_cnt == 4'(LEVELS));

  dphls_traceback #(
    .KERNEL(KERNEL), .N_PE(N_PE), .MAX_QUERY_LENGTH(MAX_QUERY_LENGTH),
    .MAX_REFERENCE_LENGTH(MAX_REFERENCE_LENGTH), .DEPTH(DEPTH)
  ) u_tb (
    .clk, .rst_n,
    .start     (tb_start),
    .start_i   (QW'(best.row)),
    .start_j   (RW'(best.col)),
    .r_len,
    .rbank     (tm_rbank),
    .raddr     (tm_raddr),
    .rdata     (tm_rdata),
    .path_we   (path_we),
    .path_addr (path_waddr),
    .path_move (path_wmove),
    .busy      (tb_busy),
    .done      (tb_done),
    .end_i     (tb_end_i),
    .end_j     (tb_end_j),
    .path_len  (tb_len)
  );

  always_ff @(posedge clk) begin
    if (path_we) path_mem[path_waddr] <= path_wmove;
  end
  assign path_rdata = path_mem[path_raddr];

  // ---------------- sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      row_base <= '0;
      wf       <= '0;
      tb_base  <= '0;
      red_cnt  <= '0;
      done     <= 1'b0;
      score    <= '0;
      start_i  <= '0;
      start_j  <= '0;
      end_i    <= '0;
      end_j    <= '0;
      path_len <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          row_base <= '0;
          tb_base  <= '0;
          state    <= S_INIT;
        end
        S_INIT: if (init_done) state <= S_LOAD;
        S_LOAD: begin
          wf    <= '0;
          state <= S_WAVE;
        end
        S_WAVE: begin
          if (wf == wf_last) begin
            wf <= '0;
            if (32'(row_base) + N_PE >= 32'(q_len)) begin
              red_cnt <= '0;
              state   <= S_REDUCE;
            end else begin
              row_base <= row_base + QW'(N_PE);
              tb_base  <= tb_base + AW'(wf_last) + 1'b1;
              state    <= S_LOAD;
            end
          end else begin
            wf <= wf + 1'b1;
          end
        end
        S_REDUCE: begin
          red_cnt <= red_cnt + 1'b1;
          if (red_cnt == 4'(LEVELS)) begin
            score   <= best.score;
            start_i <= QW'(best.row);
            start_j <= RW'(best.col);
            state   <= S_TRACE;
          end
        end
        S_TRACE: if (tb_done) begin
          end_i    <= tb_end_i;
          end_j    <= tb_end_j;
          path_len <= tb_len;
          state    <= S_DONE;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // Rules of use
  always_ff @(posedge clk) begin
    if (rst_n && start && state == S_IDLE) begin
      assert (q_len != 0 && 32'(q_len) <= MAX_QUERY_LENGTH)
        else $error("dphls_block: q_len out of range");
      assert (r_len != 0 && 32'(r_len) <= MAX_REFERENCE_LENGTH)
        else $error("dphls_block: r_len out of range");
    end
  end

endmodule
