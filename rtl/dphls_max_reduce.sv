// dphls_max_reduce: reduction of the per-PE best cells to the single cell
// where traceback starts.
//
// Each PE keeps its own best eligible cell while the matrix is filled.  When
// the fill ends, this pipelined binary tree of comparators picks the best of
// the N_PE candidates: higher score wins, equal scores go to the smaller row
// and then the smaller column (first cell in row-major order).  Invalid
// candidates never win over valid ones.
//
// Timing: one register per tree level; the result for the inputs of cycle t
// appears at cycle t + LEVELS, LEVELS = clog2(N_PE).  N_PE must be a power of
// two and at least 2.
module dphls_max_reduce
  import dphls_pkg::*;
#(
  parameter int N_PE = 64
) (
  input  logic  clk,
  input  logic  rst_n,
  input  cand_t in_cand [N_PE],
  output cand_t out_cand
);

  localparam int LEVELS = $clog2(N_PE);

  // Heap-ordered tree of registered nodes: node k (1 <= k < N_PE) holds the
  // better of its children 2k and 2k+1; indices >= N_PE are the inputs.
  cand_t node [N_PE];

  function automatic cand_t child(int idx, cand_t nodes [N_PE], cand_t leaves [N_PE]);
    return (idx >= N_PE) ? leaves[idx-N_PE] : nodes[idx];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_PE; k++) node[k] <= '0;
    end else begin
      node[0] <= '0;
      for (int k = 1; k < N_PE; k++) begin
        node[k] <= cand_better(child(2*k+1, node, in_cand), child(2*k, node, in_cand)) ?
                   child(2*k+1, node, in_cand) : child(2*k, node, in_cand);
      end
    end
  end

  assign out_cand = node[1];

  initial begin
    assert (N_PE >= 2 && (1 << LEVELS) == N_PE)
      else $error("dphls_max_reduce: N_PE must be a power of two >= 2");
  end

endmodule
