// gce: GEMM compute engine (fully connected layers).
//
// Computes Y[m][n] = bias[n] + sum_k A[m][k] * B[k][n] for an M x KD INT8
// activation matrix A and a KD x N INT8 weight matrix B, on a ROWS x COLS
// systolic array of MAC units, tile by tile (ceil(M/ROWS) x ceil(N/COLS)
// tiles). A arrives as a stream (IN_VEC values per beat, row-major) and is
// kept in an on-chip operand buffer of IN_VEC-wide words; B and the biases are preloaded by the
// host into an on-chip weight buffer whose rows hold all N weights of one k,
// so one read per cycle serves every column. For each tile the engine reads
// k = 0..KD-1, one row-column pair of operands per cycle, and skews them with
// short delay lines (row r by r cycles, column c by c cycles) before they
// enter the array. The systolic MAC grid and the one-pair-per-cycle pipeline
// follow the design; the output-stationary dataflow, the tile order and the
// operand buffering are this implementation's choices.
//
// Output: one COLS-wide 32-bit vector per valid row of each tile (columns
// past N are 0), order: row tiles, column tiles, rows. Timing per tile: 1
// clear cycle, KD+ROWS+COLS-2 compute cycles, then one cycle per output row
// when the consumer is ready. frame_done pulses after the last output.
// Requires KD to be a multiple of IN_VEC.
module gce
  import armor_pkg::*;
#(
  parameter int unsigned M      = 1,
  parameter int unsigned KD     = 16384,
  parameter int unsigned N      = 10,
  parameter int unsigned ROWS   = 1,
  parameter int unsigned COLS   = 10,
  parameter int unsigned IN_VEC = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  act_t [IN_VEC-1:0]     in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output acc_t [COLS-1:0]       out_data,
  // weight / bias preload: B[wr_k][wr_n] (low 8 bits) or bias[wr_n]
  input  logic        wb_en,
  input  logic        wb_bias,
  input  logic [23:0] wb_k,
  input  logic [15:0] wb_n,
  input  logic [31:0] wb_data,
  output logic        frame_done
);
  localparam int unsigned MT    = (M + ROWS - 1) / ROWS;
  localparam int unsigned NT    = (N + COLS - 1) / COLS;
  localparam int unsigned BEATS = M * KD / IN_VEC;
  localparam int unsigned TRUN  = KD + ROWS + COLS - 2;

  typedef enum logic [1:0] {G_LOAD, G_CLR, G_RUN, G_OUT} state_t;
  state_t state;

  localparam int unsigned KW = KD / IN_VEC;   // activation words per row

  act_t [IN_VEC-1:0] amem [M][KW];
  wgt_t bmem [KD][N];
  acc_t bias [N];

  logic [31:0] beat_cnt, t, mt, nt, orow;
  logic [31:0] a_row, a_word;   // activation write pointer

  // ---------------- operand buffers ----------------
  wire in_beat = in_valid && in_ready;
  assign in_ready = (state == G_LOAD);

  always_ff @(posedge clk) begin
    if (in_beat) amem[a_row][a_word] <= in_data;
    if (wb_en && wb_n < 16'(N)) begin
      if (wb_bias) bias[wb_n] <= acc_t'(wb_data);
      else if (wb_k < 24'(KD)) bmem[wb_k][wb_n] <= wgt_t'(wb_data[7:0]);
    end
  end

  // ---------------- operand feed with skew ----------------
  act_t a_cur  [ROWS];
  wgt_t b_cur  [COLS];
  act_t a_left [ROWS];
  wgt_t b_top  [COLS];
  act_t a_dly  [ROWS][ROWS];
  wgt_t b_dly  [COLS][COLS];
  acc_t acc    [ROWS][COLS];

  wire feeding = (state == G_RUN) && (t < KD);

  always_comb begin
    for (int r = 0; r < ROWS; r++)
      a_cur[r] = (feeding && (mt * ROWS + r < M)) ? amem[mt * ROWS + r][t / IN_VEC][t % IN_VEC] : '0;
    for (int c = 0; c < COLS; c++)
      b_cur[c] = (feeding && (nt * COLS + c < N)) ? bmem[t][nt * COLS + c] : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) for (int d = 0; d < ROWS; d++) a_dly[r][d] <= '0;
      for (int c = 0; c < COLS; c++) for (int d = 0; d < COLS; d++) b_dly[c][d] <= '0;
    end else begin
      for (int r = 0; r < ROWS; r++) begin
        a_dly[r][0] <= a_cur[r];
        for (int d = 1; d < ROWS; d++) a_dly[r][d] <= a_dly[r][d-1];
      end
      for (int c = 0; c < COLS; c++) begin
        b_dly[c][0] <= b_cur[c];
        for (int d = 1; d < COLS; d++) b_dly[c][d] <= b_dly[c][d-1];
      end
    end
  end

  // row r enters r cycles late, column c enters c cycles late
  always_comb begin
    for (int r = 0; r < ROWS; r++) a_left[r] = (r == 0) ? a_cur[0] : a_dly[r][r-1];
    for (int c = 0; c < COLS; c++) b_top[c]  = (c == 0) ? b_cur[0] : b_dly[c][c-1];
  end

  systolic_array #(.ROWS(ROWS), .COLS(COLS)) u_sa (
    .clk, .rst_n,
    .clear (state == G_CLR),
    .a_left(a_left),
    .b_top (b_top),
    .acc   (acc)
  );

  // ---------------- output ----------------
  assign out_valid = (state == G_OUT);
  always_comb begin
    for (int c = 0; c < COLS; c++)
      out_data[c] = (nt * COLS + c < N) ? acc[orow][c] + bias[nt * COLS + c] : '0;
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= G_LOAD; beat_cnt <= '0; t <= '0; mt <= '0; nt <= '0; orow <= '0;
      a_row <= '0; a_word <= '0;
      frame_done <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      unique case (state)
        G_LOAD: if (in_beat) begin
          if (a_word == KW - 1) begin a_word <= '0; a_row <= a_row + 1; end
          else a_word <= a_word + 1;
          if (beat_cnt == BEATS - 1) begin
            beat_cnt <= '0; a_row <= '0; a_word <= '0; state <= G_CLR;
          end else beat_cnt <= beat_cnt + 1;
        end
        G_CLR: begin t <= '0; state <= G_RUN; end
        G_RUN: begin
          if (t == TRUN - 1) begin t <= '0; orow <= '0; state <= G_OUT; end
          else t <= t + 1;
        end
        G_OUT: if (out_ready) begin
          if (orow + 1 < ROWS && mt * ROWS + orow + 1 < M) orow <= orow + 1;
          else begin
            orow <= '0;
            if (nt + 1 < NT) begin nt <= nt + 1; state <= G_CLR; end
            else begin
              nt <= '0;
              if (mt + 1 < MT) begin mt <= mt + 1; state <= G_CLR; end
              else begin mt <= '0; state <= G_LOAD; frame_done <= 1'b1; end
            end
          end
        end
        default: state <= G_LOAD;
      endcase
    end
  end
endmodule
