// input_buffer: on-chip store of the input SAR image.
//
// The host writes the H x W image (C channels per pixel, INT8; a SAR image
// is a single intensity channel) into this buffer before inference. A start
// pulse then streams the image to the first convolution engine in row-major
// order, one pixel (all C channels) per beat, REPLAY times in a row (REPLAY
// = number of folds of the first layer). The buffer is the design's input
// buffer; the write port, the start pulse and the replay count are this
// implementation's choices.
//
// Interface: wr_en/wr_addr (pixel index h*W+w)/wr_data; start (ignored while
// streaming); out_valid/out_ready; busy is high while streaming.
module input_buffer
  import armor_pkg::*;
#(
  parameter int unsigned H      = 128,
  parameter int unsigned W      = 128,
  parameter int unsigned C      = 1,
  parameter int unsigned REPLAY = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                         wr_en,
  input  logic [$clog2(H*W)-1:0]       wr_addr,
  input  act_t [C-1:0]                 wr_data,
  input  logic                         start,
  output logic                         out_valid,
  input  logic                         out_ready,
  output act_t [C-1:0]                 out_data,
  output logic                         busy
);
  localparam int unsigned NPIX = H * W;

  act_t [C-1:0] mem [NPIX];
  logic [31:0] pix, rep;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  assign out_valid = busy;
  assign out_data  = mem[pix];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; pix <= '0; rep <= '0;
    end else if (!busy) begin
      if (start) begin busy <= 1'b1; pix <= '0; rep <= '0; end
    end else if (out_ready) begin
      if (pix == NPIX - 1) begin
        pix <= '0;
        if (rep == REPLAY - 1) begin rep <= '0; busy <= 1'b0; end
        else rep <= rep + 1;
      end else pix <= pix + 1;
    end
  end
endmodule
