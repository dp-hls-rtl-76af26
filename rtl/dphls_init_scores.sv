// dphls_init_scores: generator of the initial row and column scores of the
// DP matrix (init_row_scr / init_col_scr).
//
// For the global kernel the first row and column hold gap multiples,
// H(0,k) = H(k,0) = k * linear_gap; the local, overlap and semi-global
// kernels start from zeros.  The generator produces one index per cycle,
// k = 0 .. count-1, forming k*gap with a running sum instead of a multiplier.
// Because the two boundary vectors of the linear kernels are the same
// function of k, one sequence serves both arrays; the block writes it into
// its row buffer and column array during its initialisation phase, which,
// as in the framework, runs before (not overlapped with) the matrix fill.
//
// Timing: 'start' (one cycle) loads count and gap.  valid is high for
// 'count' consecutive cycles starting the cycle after start; 'done' pulses
// in the cycle after the last valid output.
module dphls_init_scores
  import dphls_pkg::*;
#(
  parameter kernel_e KERNEL  = K_GLOBAL_LINEAR,
  parameter int      MAX_LEN = 256
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [$clog2(MAX_LEN+2)-1:0] count,
  input  score_t                     gap,
  output logic                       valid,
  output logic [$clog2(MAX_LEN+2)-1:0] idx,
  output score_t                     score,
  output logic                       done
);

  localparam int IW = $clog2(MAX_LEN + 2);

  logic [IW-1:0] remaining;
  score_t        gap_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid     <= 1'b0;
      idx       <= '0;
      score     <= '0;
      remaining <= '0;
      gap_q     <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        gap_q     <= gap;
        idx       <= '0;
        score     <= '0;
        valid     <= (count != 0);
        remaining <= count;
      end else if (valid) begin
        if (remaining == 1) begin
          valid <= 1'b0;
          done  <= 1'b1;
        end else begin
          idx   <= idx + 1'b1;
          score <= (KERNEL == K_GLOBAL_LINEAR) ? score + gap_q : score_t'(0);
        end
        remaining <= remaining - 1'b1;
      end
    end
  end

endmodule
