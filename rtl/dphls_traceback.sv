// dphls_traceback: traceback finite-state machine of the linear-gap kernels.
//
// Starting from the cell chosen by the best-cell reduction (bottom-right for
// the global kernel), it walks back through the matrix one cell per cycle.
// For the current cell (i,j), i,j >= 1, the pointer lives in bank
// p = (i-1) mod N_PE at address
//     base + (j-1) + p,   base = ((i-1) div N_PE) * (r_len + N_PE - 1),
// matching the address-coalesced layout the PE array wrote.  The chunk base
// of the start cell is computed once with a multiply (SETUP state); after
// that, stepping up one row only decrements p, or wraps p to N_PE-1 and
// subtracts one chunk stride.
//
// The linear kernels have a single traceback state (match/mismatch), so the
// pointer alone chooses the move: TB_DIAG -> AL_MMI (i-1, j-1),
// TB_UP -> AL_DEL (i-1), TB_LEFT -> AL_INS (j-1), TB_END -> stop.  Where the
// walk stops depends on the kernel:
//   global       runs to (0,0); on row 0 it moves left, on column 0 up
//   local        stops at a TB_END pointer (a zero cell) or on row/col 0
//   semi-global  stops on row 0; on column 0 it moves up
//   overlap      stops on row 0 or column 0
// Every move is written to the path buffer (path_addr 0 first, i.e. in
// reverse alignment order), followed by one AL_END entry.  done pulses for
// one cycle with end_i/end_j (the last cell reached) and path_len (moves,
// not counting AL_END).
//
// Timing: start is taken in IDLE; then 1 SETUP cycle, one WALK cycle per
// move plus one WALK cycle that writes AL_END, one FIN cycle, and done is
// high in the cycle after FIN: path_len + 4 cycles from start to done.  TB memory reads are
// combinational (rbank/raddr -> rdata in the same cycle).
module dphls_traceback
  import dphls_pkg::*;
#(
  parameter kernel_e KERNEL               = K_GLOBAL_LINEAR,
  parameter int      N_PE                 = 64,
  parameter int      MAX_QUERY_LENGTH     = 256,
  parameter int      MAX_REFERENCE_LENGTH = 256,
  parameter int      DEPTH = ((MAX_QUERY_LENGTH + N_PE - 1) / N_PE) * (MAX_REFERENCE_LENGTH + N_PE - 1),
  localparam int     QW  = $clog2(MAX_QUERY_LENGTH + 1),
  localparam int     RW  = $clog2(MAX_REFERENCE_LENGTH + 1),
  localparam int     PW  = $clog2(MAX_QUERY_LENGTH + MAX_REFERENCE_LENGTH + 1),
  localparam int     AW  = $clog2(DEPTH),
  localparam int     LOG = $clog2(N_PE)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [QW-1:0]   start_i,
  input  logic [RW-1:0]   start_j,
  input  logic [RW-1:0]   r_len,
  // TB memory read port
  output logic [LOG-1:0]  rbank,
  output logic [AW-1:0]   raddr,
  input  tb_ptr_e         rdata,
  // path buffer write port
  output logic            path_we,
  output logic [PW-1:0]   path_addr,
  output tb_move_e        path_move,
  // status and result
  output logic            busy,
  output logic            done,
  output logic [QW-1:0]   end_i,
  output logic [RW-1:0]   end_j,
  output logic [PW-1:0]   path_len
);

  typedef enum logic [1:0] {S_IDLE, S_SETUP, S_WALK, S_FIN} state_e;
  state_e state;

  logic [QW-1:0]  i_q;
  logic [RW-1:0]  j_q;
  logic [LOG-1:0] p_q;
  logic [AW-1:0]  base_q;
  logic [PW-1:0]  len_q;
  logic [AW-1:0]  stride;
  logic [QW-1:0]  im1;

  tb_move_e move;

  assign stride = AW'(r_len) + AW'(N_PE - 1);
  assign im1    = i_q - 1'b1;
  assign rbank  = p_q;
  assign raddr  = base_q + AW'(j_q) - 1'b1 + AW'(p_q);

  // Choose the move for the current cell.
  always_comb begin
    logic at_top, at_left;
    tb_move_e ptr_move;
    at_top  = (i_q == '0);
    at_left = (j_q == '0);
    unique case (rdata)
      TB_DIAG: ptr_move = AL_MMI;
      TB_UP:   ptr_move = AL_DEL;
      TB_LEFT: ptr_move = AL_INS;
      default: ptr_move = AL_END;
    endcase
    unique case (KERNEL)
      K_GLOBAL_LINEAR:
        if (at_top && at_left) move = AL_END;
        else if (at_top)       move = AL_INS;
        else if (at_left)      move = AL_DEL;
        else                   move = ptr_move;
      K_SEMIGLOBAL_LINEAR:
        if (at_top)            move = AL_END;
        else if (at_left)      move = AL_DEL;
        else                   move = ptr_move;
      default:  // local and overlap
        if (at_top || at_left) move = AL_END;
        else                   move = ptr_move;
    endcase
  end

  always_comb begin
    path_we   = 1'b0;
    path_addr = len_q;
    path_move = move;
    if (state == S_WALK) path_we = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      i_q      <= '0;
      j_q      <= '0;
      p_q      <= '0;
      base_q   <= '0;
      len_q    <= '0;
      done     <= 1'b0;
      end_i    <= '0;
      end_j    <= '0;
      path_len <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          i_q   <= start_i;
          j_q   <= start_j;
          len_q <= '0;
          state <= S_SETUP;
        end
        S_SETUP: begin
          // starting address: chunk index times chunk stride (one multiply)
          p_q    <= LOG'(im1);
          base_q <= AW'(AW'(im1 >> LOG) * stride);
          state  <= S_WALK;
        end
        S_WALK: begin
          if (move == AL_END) begin
            end_i    <= i_q;
            end_j    <= j_q;
            path_len <= len_q;
            state    <= S_FIN;
          end else begin
            len_q <= len_q + 1'b1;
            if (move != AL_INS) begin      // row decreases
              i_q <= im1;
              if (p_q == '0) begin
                p_q    <= LOG'(N_PE - 1);
                base_q <= base_q - stride;
              end else begin
                p_q <= p_q - 1'b1;
              end
            end
            if (move != AL_DEL) j_q <= j_q - 1'b1;
          end
        end
        S_FIN: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
