// fmap_repack: input repacking stage between layers.
//
// A convolution engine with channel folding emits its output fold by fold:
// all pixels of channels 0..IN_VEC-1, then all pixels of the next channel
// group, and so on. The next convolution layer instead reads one pixel with
// all of its C input channels per beat, and when that layer is itself
// folded it must see the whole frame once per fold. This stage stores one
// H x W x C INT8 feature map arriving in fold-major order (IN_VEC channels
// per beat, lanes beyond C ignored) and then emits it REPLAY times in
// pixel-major order, C channels per beat. Reordering channel groups between
// folds is the design's repacking stage; the single frame store (filling
// and draining do not overlap), banked by channel group so that a whole
// fold-major word is written and all C channels are read in one cycle, and
// the replay count are this implementation's choices.
//
// Interface: in_valid/in_ready (ready while filling), out_valid/out_ready
// (valid while draining). Timing: one beat per cycle on each side;
// ceil(C/IN_VEC)*H*W cycles to fill and REPLAY*H*W to drain at full rate.
module fmap_repack
  import armor_pkg::*;
#(
  parameter int unsigned H      = 64,
  parameter int unsigned W      = 64,
  parameter int unsigned C      = 8,
  parameter int unsigned IN_VEC = 8,
  parameter int unsigned REPLAY = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  act_t [IN_VEC-1:0]  in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output act_t [C-1:0]       out_data,
  output logic               frame_done
);
  localparam int unsigned NPIX    = H * W;
  localparam int unsigned IN_FOLD = (C + IN_VEC - 1) / IN_VEC;

  // one bank per input channel group, one IN_VEC-wide word per pixel
  act_t [IN_VEC-1:0] mem [IN_FOLD][NPIX];

  logic        filling;
  logic [31:0] pix, grp, rep;

  assign in_ready  = filling;
  assign out_valid = !filling;
  always_comb
    for (int c = 0; c < C; c++) out_data[c] = mem[c / IN_VEC][pix][c % IN_VEC];

  wire in_beat  = in_valid && in_ready;
  wire out_beat = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (in_beat) mem[grp][pix] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      filling <= 1'b1; pix <= '0; grp <= '0; rep <= '0; frame_done <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      if (in_beat) begin
        if (pix == NPIX - 1) begin
          pix <= '0;
          if (grp == IN_FOLD - 1) begin grp <= '0; filling <= 1'b0; end
          else grp <= grp + 1;
        end else pix <= pix + 1;
      end
      if (out_beat) begin
        if (pix == NPIX - 1) begin
          pix <= '0;
          if (rep == REPLAY - 1) begin rep <= '0; filling <= 1'b1; frame_done <= 1'b1; end
          else rep <= rep + 1;
        end else pix <= pix + 1;
      end
    end
  end
endmodule
