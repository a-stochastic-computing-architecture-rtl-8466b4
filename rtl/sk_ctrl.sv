// sk_ctrl: iteration sequencer of the Sparse Kaczmarz engine.
//
// A run starts on `start` (ignored while busy) with N = num_iter iterations
// (N = 0 is treated as 1).  It first spends one INIT clock (init and clr
// high: v and all stochastic state cleared, the x counters cleared).  Each
// iteration k = 1..N then streams for L clocks (streaming high) using row
// row = (k-1) mod M_ROWS, followed by one UPDATE clock (update and clr high)
// in which v^(k+1) is copied into the v store and the stochastic state is
// cleared.  last_iter is high during iteration N, when the x streams are
// converted to the output memory.  done pulses for one clock after the last
// UPDATE.  A run therefore takes 1 + N (L + 1) clocks from the clock after
// start to done.  The architecture gives N iterations of L-bit streams and
// the cyclic re-use of rows; the FSM and the extra clocks are this design's.
module sk_ctrl
  import sc_pkg::*;
#(
  parameter int unsigned M_ROWS = DEF_M,
  parameter int unsigned L      = STREAM_L,
  localparam int unsigned RW    = (M_ROWS > 1) ? $clog2(M_ROWS) : 1,
  localparam int unsigned LW    = $clog2(L + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ITER_W-1:0] num_iter,
  output logic              busy,
  output logic              init,
  output logic              streaming,
  output logic              update,
  output logic              clr,
  output logic              last_iter,
  output logic              done,
  output logic [RW-1:0]     row,
  output logic [ITER_W-1:0] iter
);
  typedef enum logic [1:0] {S_IDLE, S_INIT, S_STREAM, S_UPDATE} state_e;

  state_e            state;
  logic [LW-1:0]     cyc;
  logic [ITER_W-1:0] n_q;

  assign busy      = (state != S_IDLE);
  assign init      = (state == S_INIT);
  assign streaming = (state == S_STREAM);
  assign update    = (state == S_UPDATE);
  assign clr       = init || update;
  assign last_iter = (iter == n_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cyc   <= '0;
      n_q   <= '0;
      iter  <= '0;
      row   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          n_q   <= (num_iter == '0) ? ITER_W'(1) : num_iter;
          iter  <= ITER_W'(1);
          row   <= '0;
          state <= S_INIT;
        end
        S_INIT: begin
          cyc   <= '0;
          state <= S_STREAM;
        end
        S_STREAM: begin
          if (cyc == LW'(L - 1)) state <= S_UPDATE;
          else                   cyc   <= cyc + 1'b1;
        end
        S_UPDATE: begin
          cyc <= '0;
          if (iter == n_q) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            iter  <= iter + 1'b1;
            row   <= (int'(row) == M_ROWS - 1) ? '0 : row + 1'b1;
            state <= S_STREAM;
          end
        end
      endcase
    end
  end
endmodule
