// systolic_array: ROWS x COLS grid of MAC units for the GEMM engine.
//
// Activations enter at the left edge (one per row) and move right one PE per
// cycle; weights enter at the top edge (one per column) and move down one PE
// per cycle. Each PE keeps its own output element (output-stationary), so
// after the operands of a K-long dot product have been fed with the usual
// skew (row r delayed by r cycles, column c by c cycles) PE (r,c) holds
// C[r][c] = sum_k A[r][k] * B[k][c]. The caller supplies the skewed,
// zero-padded operand streams. clear zeroes every accumulator.
module systolic_array
  import armor_pkg::*;
#(
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  act_t a_left [ROWS],
  input  wgt_t b_top  [COLS],
  output acc_t acc    [ROWS][COLS]
);
  act_t a_w [ROWS][COLS+1];
  wgt_t b_w [ROWS+1][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_a_edge
    assign a_w[r][0] = a_left[r];
  end
  for (genvar c = 0; c < COLS; c++) begin : g_b_edge
    assign b_w[0][c] = b_top[c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      mac_pe u_mac (
        .clk, .rst_n, .clear,
        .a_in (a_w[r][c]),
        .b_in (b_w[r][c]),
        .a_out(a_w[r][c+1]),
        .b_out(b_w[r+1][c]),
        .acc  (acc[r][c])
      );
    end
  end
endmodule
