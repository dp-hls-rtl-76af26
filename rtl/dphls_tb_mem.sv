// dphls_tb_mem: banked traceback-pointer memory.
//
// The DP matrix of pointers is stored with its first dimension equal to the
// number of PEs: bank p holds every pointer computed by PE p, so all PEs can
// store one pointer each per cycle.  Writes are address-coalesced: all PEs of
// one wavefront write the same address (in different banks), and consecutive
// wavefronts use consecutive addresses.  The writer passes
//     addr = chunk * (ref_len + N_PE - 1) + wavefront
// so cell (i,j) of the matrix, with i-1 = chunk*N_PE + p, lands in bank p at
// chunk*(ref_len+N_PE-1) + (j-1) + p.
//
// Per-bank write enables (PEs outside the matrix do not write), one shared
// write address, one combinational read port (bank, address) used by the
// traceback FSM.  DEPTH defaults to ceil(MAX_Q/N_PE) * (MAX_R + N_PE - 1).
module dphls_tb_mem
  import dphls_pkg::*;
#(
  parameter int N_PE  = 64,
  parameter int DEPTH = 1276
) (
  input  logic                     clk,
  input  logic [N_PE-1:0]          we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  tb_ptr_e                  wdata [N_PE],
  input  logic [$clog2(N_PE)-1:0]  rbank,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output tb_ptr_e                  rdata
);

  tb_ptr_e mem [N_PE][DEPTH];

  always_ff @(posedge clk) begin
    for (int p = 0; p < N_PE; p++) begin
      if (we[p]) mem[p][waddr] <= wdata[p];
    end
  end

  assign rdata = mem[rbank][raddr];

endmodule
