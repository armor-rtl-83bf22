// tb_armor_top: end-to-end testbench of the streaming accelerator at a
// reduced size (16 x 16 image, 4/8/8 channels, 5 classes) so that two
// complete inferences with fresh weights run in a few seconds. Layer 2
// still uses channel folding (8 channels on 4 PEs) and layer 3 the pooling
// bypass. The checks are in armor_tb_body.svh.
module tb_armor_top;
  import armor_pkg::*;
  localparam int IMG_H = 16, IMG_W = 16, C1 = 4, C2 = 8, C3 = 8, K = 3, PAD = 1;
  localparam int PE1 = 4, PE2 = 4, PE3 = 8, KM = 2, NCLS = 5, NIMG = 2;
  localparam int WATCHDOG = 200000;

  armor_top #(.IMG_H(IMG_H), .IMG_W(IMG_W), .C1(C1), .C2(C2), .C3(C3), .K(K), .PAD(PAD),
              .PE1(PE1), .PE2(PE2), .PE3(PE3), .KM(KM), .NCLS(NCLS)) dut (.*);

  `include "armor_tb_body.svh"
endmodule
