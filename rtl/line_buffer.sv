// line_buffer: circular K-row input line buffer of the convolution engine.
//
// Holds K rows of the input feature map, IW pixels wide, IC channels per
// pixel. Rows are written in order; input row r lives in slot r mod K, so a
// rotating head pointer (the slot of the next row to be written) moves by
// one per completed row and each new row overwrites exactly the oldest one.
// Between two output rows the engine therefore loads only `stride` new rows
// instead of re-reading K rows. The K-row circular organisation with a
// rotating head follows the design; reading one channel's KxK window per
// cycle with zero fill outside the image (padding) is how this
// implementation serves the PEs.
//
// Write side: wr_en writes the IC-channel pixel wr_data at column wr_col of
// the row under the head pointer; wr_row_done advances the head. frame_start
// resets the head to slot 0 at the start of a frame (or of a fold pass).
// Read side (combinational): the KxK window of channel rd_ch whose top-left
// corner is at input row rd_top and column rd_left (both may be negative or
// run past the image edge because of padding; such taps read as 0).
module line_buffer
  import armor_pkg::*;
#(
  parameter int unsigned K  = 3,
  parameter int unsigned IH = 128,
  parameter int unsigned IW = 128,
  parameter int unsigned IC = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic frame_start,
  input  logic wr_en,
  input  logic [$clog2(IW+1)-1:0] wr_col,
  input  act_t wr_data [IC],
  input  logic wr_row_done,
  input  logic signed [15:0] rd_top,
  input  logic signed [15:0] rd_left,
  input  logic [$clog2(IC+1)-1:0] rd_ch,
  output act_t win [K*K],
  output logic [$clog2(K+1)-1:0] head
);
  act_t buf_q [K][IW][IC];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               head <= '0;
    else if (frame_start)     head <= '0;
    else if (wr_row_done)     head <= (head == ($clog2(K+1))'(K-1)) ? '0 : head + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int c = 0; c < IC; c++) buf_q[head][wr_col][c] <= wr_data[c];
    end
  end

  always_comb begin
    for (int kh = 0; kh < K; kh++) begin
      for (int kw = 0; kw < K; kw++) begin
        automatic int r  = int'(rd_top)  + kh;
        automatic int cl = int'(rd_left) + kw;
        if (r < 0 || r >= int'(IH) || cl < 0 || cl >= int'(IW))
          win[kh*K+kw] = '0;
        else
          win[kh*K+kw] = buf_q[r % K][cl][rd_ch];
      end
    end
  end
endmodule
