// dphls_row_buffer: the preserved row score buffer.
//
// Holds one score per reference column.  The last PE of the systolic array
// writes the scores of the last row of a query chunk here; PE0 reads them
// back as its "up" neighbours while the next chunk is computed.  Before the
// first chunk it is filled with the initial row scores.  Entry j-1 holds
// column j (column 0 is supplied from the initial column scores instead).
//
// One synchronous write port, one combinational (asynchronous) read port.
// A read and write of the same entry in the same cycle returns the old
// value, which the array relies on when N_PE is small.
module dphls_row_buffer
  import dphls_pkg::*;
#(
  parameter int MAX_REFERENCE_LENGTH = 256
) (
  input  logic                                    clk,
  input  logic                                    we,
  input  logic [$clog2(MAX_REFERENCE_LENGTH)-1:0] waddr,
  input  score_t                                  wdata,
  input  logic [$clog2(MAX_REFERENCE_LENGTH)-1:0] raddr,
  output score_t                                  rdata
);

  score_t mem [MAX_REFERENCE_LENGTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
