// sk_problem_mem: deterministic storage of the estimation problem.
//
// Holds the M_ROWS x N_DIM system matrix A, the M_ROWS measurements y, the
// M_ROWS row weights 1/||a_i||^2 and lambda, all as signed W+1-bit values
// c standing for c / (2^W - 1).  The host writes one value per clock
// (wr_sel picks the table, wr_row / wr_col the entry); writes outside the
// tables are ignored.  The datapath reads a whole row at once: a_row, y_val
// and inv_norm follow rd_row combinationally, lambda_val is always present.
// Reset clears everything.  The architecture only says that conversion boxes
// sit between a deterministic memory and the stochastic domain; the layout,
// the word format and the write port are this design's.
module sk_problem_mem
  import sc_pkg::*;
#(
  parameter int unsigned N_DIM  = DEF_N,
  parameter int unsigned M_ROWS = DEF_M,
  parameter int unsigned W      = LFSR_W,
  localparam int unsigned RW    = (M_ROWS > 1) ? $clog2(M_ROWS) : 1,
  localparam int unsigned CLW   = (N_DIM > 1) ? $clog2(N_DIM) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_en,
  input  wr_sel_e             wr_sel,
  input  logic [RW-1:0]       wr_row,
  input  logic [CLW-1:0]      wr_col,
  input  logic signed [W:0]   wr_data,
  input  logic [RW-1:0]       rd_row,
  output logic signed [W:0]   a_row [N_DIM],
  output logic signed [W:0]   y_val,
  output logic signed [W:0]   inv_norm,
  output logic signed [W:0]   lambda_val
);
  logic signed [W:0] a_mem [M_ROWS][N_DIM];
  logic signed [W:0] y_mem [M_ROWS];
  logic signed [W:0] w_mem [M_ROWS];
  logic signed [W:0] lam_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < M_ROWS; r++) begin
        for (int c = 0; c < N_DIM; c++) a_mem[r][c] <= '0;
        y_mem[r] <= '0;
        w_mem[r] <= '0;
      end
      lam_q <= '0;
    end else if (wr_en) begin
      unique case (wr_sel)
        SEL_A:       if (int'(wr_row) < M_ROWS && int'(wr_col) < N_DIM)
                       a_mem[wr_row][wr_col] <= wr_data;
        SEL_Y:       if (int'(wr_row) < M_ROWS) y_mem[wr_row] <= wr_data;
        SEL_INVNORM: if (int'(wr_row) < M_ROWS) w_mem[wr_row] <= wr_data;
        SEL_LAMBDA:  lam_q <= wr_data;
      endcase
    end
  end

  always_comb begin
    for (int c = 0; c < N_DIM; c++) a_row[c] = a_mem[rd_row][c];
    y_val      = y_mem[rd_row];
    inv_norm   = w_mem[rd_row];
    lambda_val = lam_q;
  end
endmodule
