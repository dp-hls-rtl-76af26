// dphls_kernel: one kernel -- N_B alignment blocks behind one arbiter.
//
// A kernel serves one host channel.  The arbiter decodes the channel's
// writes into the addressed block's input buffers (the input buffers are
// partitioned by block, so every block has its own), keeps a job-valid flag
// and the two sequence lengths per block, starts every block that holds a
// job in the same cycle so all N_B alignments run concurrently, and reports
// done once the last started block has finished.  Results and traceback
// paths are read back through a block-select multiplexer.
//
// Channel protocol (all synchronous, while the kernel is idle unless noted):
//   wr_en/wr_blk/wr_sel/wr_addr/wr_data  write character wr_addr of the
//        query (wr_sel=0) or reference (wr_sel=1) of block wr_blk.
//   job_en/job_blk/job_qlen/job_rlen      give block job_blk a job with these
//        lengths (job_qlen = 0 clears the job).
//   start  one-cycle pulse: start all blocks holding a job; busy rises.
//   done   one-cycle pulse when all of them have finished; busy falls.
//          The jobs stay valid, so a new start re-runs them.
//   rd_blk/rd_addr  select a block's result and a path entry (combinational).
// params (the scoring parameters) is shared by all blocks of the kernel.
module dphls_kernel
  import dphls_pkg::*;
#(
  parameter kernel_e KERNEL               = K_GLOBAL_LINEAR,
  parameter int      N_B                  = 16,
  parameter int      N_PE                 = 64,
  parameter int      MAX_QUERY_LENGTH     = 256,
  parameter int      MAX_REFERENCE_LENGTH = 256,
  localparam int     BW   = (N_B > 1) ? $clog2(N_B) : 1,
  localparam int     QW   = $clog2(MAX_QUERY_LENGTH + 1),
  localparam int     RW   = $clog2(MAX_REFERENCE_LENGTH + 1),
  localparam int     MAXL = (MAX_QUERY_LENGTH > MAX_REFERENCE_LENGTH) ? MAX_QUERY_LENGTH : MAX_REFERENCE_LENGTH,
  localparam int     SAW  = $clog2(MAXL),
  localparam int     PW   = $clog2(MAX_QUERY_LENGTH + MAX_REFERENCE_LENGTH + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  scoring_params_t params,
  // sequence writes
  input  logic            wr_en,
  input  logic [BW-1:0]   wr_blk,
  input  logic            wr_sel,
  input  logic [SAW-1:0]  wr_addr,
  input  char_t           wr_data,
  // job descriptors
  input  logic            job_en,
  input  logic [BW-1:0]   job_blk,
  input  logic [QW-1:0]   job_qlen,
  input  logic [RW-1:0]   job_rlen,
  // control
  input  logic            start,
  output logic            busy,
  output logic            done,
  // result read-back
  input  logic [BW-1:0]   rd_blk,
  input  logic [PW-1:0]   rd_addr,
  output score_t          rd_score,
  output logic [QW-1:0]   rd_start_i,
  output logic [RW-1:0]   rd_start_j,
  output logic [QW-1:0]   rd_end_i,
  output logic [RW-1:0]   rd_end_j,
  output logic [PW-1:0]   rd_path_len,
  output tb_move_e        rd_move
);

  logic [N_B-1:0] job_valid, pending, blk_done, blk_busy;
  logic [QW-1:0]  qlen [N_B];
  logic [RW-1:0]  rlen [N_B];

  score_t        b_score [N_B];
  logic [QW-1:0] b_si [N_B], b_ei [N_B];
  logic [RW-1:0] b_sj [N_B], b_ej [N_B];
  logic [PW-1:0] b_len [N_B];
  tb_move_e      b_move [N_B];

  logic go;
  assign go   = start && !busy;
  assign busy = |pending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      job_valid <= '0;
      pending   <= '0;
      done      <= 1'b0;
      for (int b = 0; b < N_B; b++) begin
        qlen[b] <= '0;
        rlen[b] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (job_en && !busy && 32'(job_blk) < N_B) begin
        job_valid[job_blk] <= (job_qlen != '0);
        qlen[job_blk]      <= job_qlen;
        rlen[job_blk]      <= job_rlen;
      end
      if (go) begin
        pending <= job_valid;
        if (job_valid == '0) done <= 1'b1;
      end else if (busy) begin
        pending <= pending & ~blk_done;
        if ((pending & ~blk_done) == '0) done <= 1'b1;
      end
    end
  end

  for (genvar b = 0; b < N_B; b++) begin : g_blk
    dphls_block #(
      .KERNEL(KERNEL), .N_PE(N_PE),
      .MAX_QUERY_LENGTH(MAX_QUERY_LENGTH), .MAX_REFERENCE_LENGTH(MAX_REFERENCE_LENGTH)
    ) u_block (
      .clk, .rst_n, .params,
      .seq_we     (wr_en && !busy && (wr_blk == BW'(b))),
      .seq_sel    (wr_sel),
      .seq_addr   (wr_addr),
      .seq_data   (wr_data),
      .q_len      (qlen[b]),
      .r_len      (rlen[b]),
      .start      (go && job_valid[b]),
      .busy       (blk_busy[b]),
      .done       (blk_done[b]),
      .score      (b_score[b]),
      .start_i    (b_si[b]),
      .start_j    (b_sj[b]),
      .end_i      (b_ei[b]),
      .end_j      (b_ej[b]),
      .path_len   (b_len[b]),
      .path_raddr (rd_addr),
      .path_rdata (b_move[b])
    );
  end

  always_comb begin
    rd_score    = b_score[rd_blk];
    rd_start_i  = b_si[rd_blk];
    rd_start_j  = b_sj[rd_blk];
    rd_end_i    = b_ei[rd_blk];
    rd_end_j    = b_ej[rd_blk];
    rd_path_len = b_len[rd_blk];
    rd_move     = b_move[rd_blk];
  end

  // A block that is pending must be busy or finishing.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int b = 0; b < N_B; b++)
        assert (!(pending[b] && !blk_busy[b] && !blk_done[b]) || go)
          else $error("dphls_kernel: block %0d pending but idle", b);
    end
  end

endmodule
