// dphls_top: the accelerator -- N_K independent kernels, each with its own
// host channel, each made of N_B blocks of N_PE processing elements.
//
// The default configuration is the one the Global Linear kernel
// (Needleman-Wunsch) reached its best throughput with: N_PE = 64, N_B = 16,
// N_K = 4, i.e. 64 alignments of up to 256 x 256 in flight on 4096 PEs.
// KERNEL chooses the alignment kernel of every channel (the framework also
// allows mixing kernels across channels; here one parameter serves all).
//
// Every port of a kernel channel (see dphls_kernel) appears here as an
// unpacked array indexed by channel.  The host-side data movers (PCIe/DMA,
// device memory) are outside this design and would drive these ports.
module dphls_top
  import dphls_pkg::*;
#(
  parameter kernel_e KERNEL               = K_GLOBAL_LINEAR,
  parameter int      N_K                  = 4,
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
  input  scoring_params_t params      [N_K],
  input  logic            wr_en       [N_K],
  input  logic [BW-1:0]   wr_blk      [N_K],
  input  logic            wr_sel      [N_K],
  input  logic [SAW-1:0]  wr_addr     [N_K],
  input  char_t           wr_data     [N_K],
  input  logic            job_en      [N_K],
  input  logic [BW-1:0]   job_blk     [N_K],
  input  logic [QW-1:0]   job_qlen    [N_K],
  input  logic [RW-1:0]   job_rlen    [N_K],
  input  logic            start       [N_K],
  output logic            busy        [N_K],
  output logic            done        [N_K],
  input  logic [BW-1:0]   rd_blk      [N_K],
  input  logic [PW-1:0]   rd_addr     [N_K],
  output score_t          rd_score    [N_K],
  output logic [QW-1:0]   rd_start_i  [N_K],
  output logic [RW-1:0]   rd_start_j  [N_K],
  output logic [QW-1:0]   rd_end_i    [N_K],
  output logic [RW-1:0]   rd_end_j    [N_K],
  output logic [PW-1:0]   rd_path_len [N_K],
  output tb_move_e        rd_move     [N_K]
);

  for (genvar k = 0; k < N_K; k++) begin : g_kernel
    dphls_kernel #(
      .KERNEL(KERNEL), .N_B(N_B), .N_PE(N_PE),
      .MAX_QUERY_LENGTH(MAX_QUERY_LENGTH), .MAX_REFERENCE_LENGTH(MAX_REFERENCE_LENGTH)
    ) u_kernel (
      .clk, .rst_n,
      .params      (params[k]),
      .wr_en       (wr_en[k]),
      .wr_blk      (wr_blk[k]),
      .wr_sel      (wr_sel[k]),
      .wr_addr     (wr_addr[k]),
      .wr_data     (wr_data[k]),
      .job_en      (job_en[k]),
      .job_blk     (job_blk[k]),
      .job_qlen    (job_qlen[k]),
      .job_rlen    (job_rlen[k]),
      .start       (start[k]),
      .busy        (busy[k]),
      .done        (done[k]),
      .rd_blk      (rd_blk[k]),
      .rd_addr     (rd_addr[k]),
      .rd_score    (rd_score[k]),
      .rd_start_i  (rd_start_i[k]),
      .rd_start_j  (rd_start_j[k]),
      .rd_end_i    (rd_end_i[k]),
      .rd_end_j    (rd_end_j[k]),
      .rd_path_len (rd_path_len[k]),
      .rd_move     (rd_move[k])
    );
  end

endmodule
