// tb_dphls_top: end-to-end test of the accelerator at a reduced size
// (2 channels x 4 blocks x 4 PEs, sequences up to 40 x 40, global kernel).
//
// All channels load their blocks concurrently, start together, and every
// result and path is compared with the reference model.  It also counts how
// often each mechanism of the design occurred -- multi-chunk alignments
// (preserved-row-buffer carry), partial last chunks, each traceback move,
// traceback along the matrix border, a block left without a job, and
// channels busy at the same time -- and fails if one never happened.
module tb_dphls_top;
  import dphls_pkg::*;
  import dphls_ref_pkg::*;

  localparam int      N_K = 2;
  localparam int      N_B = 4;
  localparam int      N_PE = 4;
  localparam int      MAXQ = 40;
  localparam int      MAXR = 40;
  localparam kernel_e KERNEL = K_GLOBAL_LINEAR;
  localparam int      QLEN_MIN = 1;
  localparam int      SIZE_MODE = 0;    // random lengths
  localparam int      WATCHDOG = 100000;

  `include "dphls_top_tb_body.svh"

  dphls_top #(.KERNEL(KERNEL), .N_K(N_K), .N_B(N_B), .N_PE(N_PE),
              .MAX_QUERY_LENGTH(MAXQ), .MAX_REFERENCE_LENGTH(MAXR)) dut (
    .clk, .rst_n, .params, .wr_en, .wr_blk, .wr_sel, .wr_addr, .wr_data, .job_en, .job_blk,
    .job_qlen, .job_rlen, .start, .busy, .done, .rd_blk, .rd_addr, .rd_score,
    .rd_start_i(rd_si), .rd_start_j(rd_sj), .rd_end_i(rd_ei), .rd_end_j(rd_ej),
    .rd_path_len(rd_len), .rd_move);

endmodule
