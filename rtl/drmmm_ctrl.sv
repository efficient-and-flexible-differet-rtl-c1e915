// drmmm_ctrl: sequencer of one Montgomery multiplication.
//
// States: IDLE -> RUN (NITER = d + t iterations) -> FSTART (one cycle,
// starts final_reduction) -> FIN (waits for its `done`) -> IDLE.
// A `start` is taken only in IDLE with the precomputed tables ready; in
// that cycle `clr` is high so the datapath clears the triplet and the
// quotient pipeline and latches the operands. During RUN `iter_en` is high
// every cycle, one iteration per clock. `done` is final_reduction's done.
// The loop count d + t follows from the algorithm: after the d digits of A,
// t more iterations flush the quotient digits still in flight. Start to
// done takes NITER + 4 cycles (72 for the default 1024-bit, k = 16, t = 4
// instance). Synchronous, active-low reset; while it is asserted all
// outputs are held low. The state machine and the handshake are this
// design's own; the iteration count is the algorithm's.
module drmmm_ctrl #(
  parameter int NITER = 68
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic tables_ready,
  input  logic fin_done,
  output logic ready,
  output logic clr,
  output logic iter_en,
  output logic fin_start,
  output logic done
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FSTART, S_FIN} state_t;

  state_t                     state_q;
  logic [$clog2(NITER+1)-1:0] cnt_q;

  // All outputs are held inactive while reset is asserted, so the state
  // before the first reset edge cannot start any datapath activity.
  assign ready     = rst_n && (state_q == S_IDLE) && tables_ready;
  assign clr       = ready && start;
  assign iter_en   = rst_n && (state_q == S_RUN);
  assign fin_start = rst_n && (state_q == S_FSTART);
  assign done      = rst_n && fin_done && (state_q == S_FIN);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      cnt_q   <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (clr) begin
          state_q <= S_RUN;
          cnt_q   <= '0;
        end
        S_RUN: begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == ($bits(cnt_q))'(NITER - 1)) state_q <= S_FSTART;
        end
        S_FSTART: state_q <= S_FIN;
        S_FIN:    if (fin_done) state_q <= S_IDLE;
        default:  state_q <= S_IDLE;
      endcase
    end
  end

endmodule
