// armor_pkg: number formats shared by the accelerator engines.
//
// Convolution and fully connected layers run on INT8 activations and INT8
// weights with 32-bit accumulation; the max-pooling engine requantizes the
// 32-bit results back to INT8 for the next layer. These widths follow the
// mixed-precision scheme of the design (INT8 datapath, 32-bit accumulators).
// The requantization parameter widths (32-bit multiplier, 6-bit shift, INT8
// zero point) are this implementation's choice.
package armor_pkg;

  localparam int unsigned ACT_W  = 8;   // activation width (INT8)
  localparam int unsigned WGT_W  = 8;   // weight width (INT8)
  localparam int unsigned ACC_W  = 32;  // accumulator / bias width
  localparam int unsigned QM_W   = 32;  // requantization multiplier width
  localparam int unsigned QSH_W  = 6;   // requantization right-shift width

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [WGT_W-1:0] wgt_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // Precomputed per-layer requantization constants:
  //   q = clamp(round(x * mult / 2^shift) + zero_point, -128, 127)
  typedef struct packed {
    logic [QM_W-1:0]  mult;
    logic [QSH_W-1:0] shift;
    act_t             zero_point;
  } quant_t;

endpackage
