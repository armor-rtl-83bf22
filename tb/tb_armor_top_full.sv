// tb_armor_top_full: end-to-end testbench of the streaming accelerator at
// its default size: one 128 x 128 SAR image through the three convolution
// layers (8, 16 and 16 channels), two pooling stages and the 16384 x 10
// fully connected layer, compared logit by logit with a golden model. The
// localparams below restate the accelerator's defaults for the golden model;
// the accelerator itself is instantiated with no parameter overrides.
module tb_armor_top_full;
  import armor_pkg::*;
  localparam int IMG_H = 128, IMG_W = 128, C1 = 8, C2 = 16, C3 = 16, K = 3, PAD = 1;
  localparam int PE1 = 8, PE2 = 8, PE3 = 16, KM = 2, NCLS = 10, NIMG = 1;
  localparam int WATCHDOG = 3000000;

  armor_top dut (.*);

  `include "armor_tb_body.svh"
endmodule
