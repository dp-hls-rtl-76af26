// tb_dphls_top_full: one complete operation of the accelerator at its
// default size -- 4 channels x 16 blocks x 64 PEs, every block aligning a
// 256 x 256 pair (the short-read workload size) with the global kernel.
//
// The 64 pairs are noisy copies (about 30% edits), loaded through the four
// channels concurrently, computed at once, and every score, start/end cell
// and traceback path is compared with the reference model.
module tb_dphls_top_full;
  import dphls_pkg::*;
  import dphls_ref_pkg::*;

  localparam int      N_K = 4;
  localparam int      N_B = 16;
  localparam int      N_PE = 64;
  localparam int      MAXQ = 256;
  localparam int      MAXR = 256;
  localparam kernel_e KERNEL = K_GLOBAL_LINEAR;
  localparam int      QLEN_MIN = 256;
  localparam int      SIZE_MODE = 1;    // every pair at the maximum length
  localparam int      WATCHDOG = 200000;

  `include "dphls_top_tb_body.svh"

  dphls_top dut (
    .clk, .rst_n, .params, .wr_en, .wr_blk, .wr_sel, .wr_addr, .wr_data, .job_en, .job_blk,
    .job_qlen, .job_rlen, .start, .busy, .done, .rd_blk, .rd_addr, .rd_score,
    .rd_start_i(rd_si), .rd_start_j(rd_sj), .rd_end_i(rd_ei), .rd_end_j(rd_ej),
    .rd_path_len(rd_len), .rd_move);

endmodule
