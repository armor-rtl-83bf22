// armor_top: streaming dataflow CNN accelerator for SAR target recognition.
//
// A chain of layer engines joined by on-chip streams classifies one
// 128 x 128 single-channel INT8 SAR image into NCLS classes without any
// off-chip traffic between layers:
//
//   input_buffer -> CCE1 -> MCE1 (2x2 pool) -> repack/replay x2
//                -> CCE2 (2 folds) -> MCE2 (2x2 pool) -> repack (fold-major
//                -> pixel-major) -> CCE3 -> MCE3 (bypass, requantize only)
//                -> GCE (fully connected) -> result_buffer
//
// Every engine is sized at build time from the layer it runs (kernel,
// channels, feature-map size, PEs), as the accelerator generator of the
// design does for a pruned model. The default network is an example chosen
// for this implementation, since the source does not list layer shapes: it
// exercises a one-to-one PE mapping (layer 1: 8 PEs for 8 channels, layer 3:
// 16 PEs for 16 channels), channel folding with N_pe^max = 8 (layer 2: 16
// channels in 2 folds, followed by the repacking stage), max pooling, the
// pooling bypass, and the GEMM engine. The input size (128 x 128, one
// channel), 10 classes (MSTAR), INT8 weights and activations with 32-bit
// accumulation, and N_pe values from {8, 16, 32, 64} follow the source.
//
// Host interface (stands in for the host / DDR controller side):
//   img_*  writes image pixels (address h*IMG_W + w) into the input buffer;
//   cfg_*  preloads weights, biases and requantization constants:
//          cfg_sel 0..2 = conv layer 1..3: cfg_a = output channel,
//                  cfg_b = input channel, cfg_kk = kh*K+kw, cfg_bias selects
//                  the bias (cfg_data = 32-bit bias, else low 8 bits = weight)
//          cfg_sel 3 = FC layer: cfg_a = k (flattened input index
//                  (h*W3+w)*C3+c), cfg_b = class n, cfg_bias as above
//          cfg_sel 4 = requantization constants: cfg_a = layer (0..2),
//                  cfg_kk = 0 multiplier, 1 shift, 2 zero point;
//   start  streams the image through the chain; done rises when all NCLS
//          32-bit logits are in the result buffer, read with res_addr.
// Timing: the layer engines run concurrently on successive parts of the
// image; the two repacking stores each hold a full feature map before
// releasing it.
module armor_top
  import armor_pkg::*;
#(
  parameter int unsigned IMG_H = 128,
  parameter int unsigned IMG_W = 128,
  parameter int unsigned C1    = 8,
  parameter int unsigned C2    = 16,
  parameter int unsigned C3    = 16,
  parameter int unsigned K     = 3,
  parameter int unsigned PAD   = 1,
  parameter int unsigned PE1   = 8,
  parameter int unsigned PE2   = 8,
  parameter int unsigned PE3   = 16,
  parameter int unsigned KM    = 2,
  parameter int unsigned NCLS  = 10,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  // image load
  input  logic                            img_we,
  input  logic [$clog2(IMG_H*IMG_W)-1:0]  img_addr,
  input  act_t                            img_data,
  // weight / bias / quantization preload
  input  logic        cfg_en,
  input  logic [2:0]  cfg_sel,
  input  logic        cfg_bias,
  input  logic [23:0] cfg_a,
  input  logic [15:0] cfg_b,
  input  logic [7:0]  cfg_kk,
  input  logic [31:0] cfg_data,
  // run control and results
  input  logic                         start,
  output logic                         busy,
  output logic                         done,
  input  logic [$clog2(NCLS+1)-1:0]    res_addr,
  output acc_t                         res_data
);
  // layer geometry (stride 1, "same" padding, KM x KM pooling)
  localparam int unsigned H1 = IMG_H + 2*PAD - K + 1, W1 = IMG_W + 2*PAD - K + 1;
  localparam int unsigned HP1 = H1 / KM, WP1 = W1 / KM;
  localparam int unsigned H2 = HP1 + 2*PAD - K + 1, W2 = WP1 + 2*PAD - K + 1;
  localparam int unsigned HP2 = H2 / KM, WP2 = W2 / KM;
  localparam int unsigned H3 = HP2 + 2*PAD - K + 1, W3 = WP2 + 2*PAD - K + 1;
  localparam int unsigned FOLD2 = (C2 + PE2 - 1) / PE2;
  localparam int unsigned KD = H3 * W3 * C3;

  // ---------------- requantization constants ----------------
  quant_t q_reg [3];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 3; i++) q_reg[i] <= '{mult: 32'd1, shift: '0, zero_point: '0};
    end else if (cfg_en && cfg_sel == 3'd4 && cfg_a < 24'd3) begin
      unique case (cfg_kk)
        8'd0:    q_reg[cfg_a[1:0]].mult       <= cfg_data;
        8'd1:    q_reg[cfg_a[1:0]].shift      <= cfg_data[QSH_W-1:0];
        8'd2:    q_reg[cfg_a[1:0]].zero_point <= act_t'(cfg_data[7:0]);
        default: ;
      endcase
    end
  end

  // ---------------- input buffer ----------------
  logic ib_valid, ib_ready;
  act_t [0:0] ib_data;
  input_buffer #(.H(IMG_H), .W(IMG_W), .C(1), .REPLAY(1)) u_in (
    .clk, .rst_n,
    .wr_en(img_we), .wr_addr(img_addr), .wr_data(img_data),
    .start, .out_valid(ib_valid), .out_ready(ib_ready), .out_data(ib_data),
    .busy(busy)
  );

  // ---------------- layer 1: CCE1 -> MCE1 ----------------
  logic c1_valid, c1_ready, m1i_valid, m1i_ready, c1_done;
  acc_t [PE1-1:0] c1_data, m1i_data;
  logic [$clog2(((C1+PE1-1)/PE1)+1)-1:0] c1_fold;

  cce #(.IH(IMG_H), .IW(IMG_W), .IC(1), .OC(C1), .K(K), .S(1), .P(PAD), .PE(PE1)) u_cce1 (
    .clk, .rst_n,
    .in_valid(ib_valid), .in_ready(ib_ready), .in_data(ib_data),
    .out_valid(c1_valid), .out_ready(c1_ready), .out_data(c1_data),
    .wb_en(cfg_en && cfg_sel == 3'd0), .wb_bias(cfg_bias), .wb_oc(cfg_a[15:0]),
    .wb_ic(cfg_b), .wb_kk(cfg_kk), .wb_data(cfg_data),
    .fold(c1_fold), .frame_done(c1_done)
  );

  stream_fifo #(.WIDTH(PE1*ACC_W), .DEPTH(FIFO_DEPTH)) u_f1 (
    .clk, .rst_n, .in_valid(c1_valid), .in_ready(c1_ready), .in_data(c1_data),
    .out_valid(m1i_valid), .out_ready(m1i_ready), .out_data(m1i_data)
  );

  logic m1_valid, m1_ready, m1_done;
  act_t [PE1-1:0] m1_data;
  mce #(.H(H1), .W(W1), .PE(PE1), .KM(KM)) u_mce1 (
    .clk, .rst_n, .bypass(1'b0), .quant(q_reg[0]),
    .in_valid(m1i_valid), .in_ready(m1i_ready), .in_data(m1i_data),
    .out_valid(m1_valid), .out_ready(m1_ready), .out_data(m1_data),
    .frame_done(m1_done)
  );

  // replay the pooled layer-1 map once per fold of layer 2
  logic r1_valid, r1_ready, r1_done;
  act_t [C1-1:0] r1_data;
  fmap_repack #(.H(HP1), .W(WP1), .C(C1), .IN_VEC(PE1), .REPLAY(FOLD2)) u_rp1 (
    .clk, .rst_n,
    .in_valid(m1_valid), .in_ready(m1_ready), .in_data(m1_data),
    .out_valid(r1_valid), .out_ready(r1_ready), .out_data(r1_data),
    .frame_done(r1_done)
  );

  // ---------------- layer 2: CCE2 (folded) -> MCE2 ----------------
  logic c2_valid, c2_ready, m2i_valid, m2i_ready, c2_done;
  acc_t [PE2-1:0] c2_data, m2i_data;
  logic [$clog2(FOLD2+1)-1:0] c2_fold;

  cce #(.IH(HP1), .IW(WP1), .IC(C1), .OC(C2), .K(K), .S(1), .P(PAD), .PE(PE2)) u_cce2 (
    .clk, .rst_n,
    .in_valid(r1_valid), .in_ready(r1_ready), .in_data(r1_data),
    .out_valid(c2_valid), .out_ready(c2_ready), .out_data(c2_data),
    .wb_en(cfg_en && cfg_sel == 3'd1), .wb_bias(cfg_bias), .wb_oc(cfg_a[15:0]),
    .wb_ic(cfg_b), .wb_kk(cfg_kk), .wb_data(cfg_data),
    .fold(c2_fold), .frame_done(c2_done)
  );

  stream_fifo #(.WIDTH(PE2*ACC_W), .DEPTH(FIFO_DEPTH)) u_f2 (
    .clk, .rst_n, .in_valid(c2_valid), .in_ready(c2_ready), .in_data(c2_data),
    .out_valid(m2i_valid), .out_ready(m2i_ready), .out_data(m2i_data)
  );

  logic m2_valid, m2_ready, m2_done;
  act_t [PE2-1:0] m2_data;
  mce #(.H(H2), .W(W2), .PE(PE2), .KM(KM)) u_mce2 (
    .clk, .rst_n, .bypass(1'b0), .quant(q_reg[1]),
    .in_valid(m2i_valid), .in_ready(m2i_ready), .in_data(m2i_data),
    .out_valid(m2_valid), .out_ready(m2_ready), .out_data(m2_data),
    .frame_done(m2_done)
  );

  // fold-major channel groups -> pixel-major C2-channel pixels
  logic r2_valid, r2_ready, r2_done;
  act_t [C2-1:0] r2_data;
  fmap_repack #(.H(HP2), .W(WP2), .C(C2), .IN_VEC(PE2), .REPLAY((C3 + PE3 - 1) / PE3)) u_rp2 (
    .clk, .rst_n,
    .in_valid(m2_valid), .in_ready(m2_ready), .in_data(m2_data),
    .out_valid(r2_valid), .out_ready(r2_ready), .out_data(r2_data),
    .frame_done(r2_done)
  );

  // ---------------- layer 3: CCE3 -> MCE3 (no pooling: bypass) ----------------
  logic c3_valid, c3_ready, m3i_valid, m3i_ready, c3_done;
  acc_t [PE3-1:0] c3_data, m3i_data;
  logic [$clog2(((C3+PE3-1)/PE3)+1)-1:0] c3_fold;

  cce #(.IH(HP2), .IW(WP2), .IC(C2), .OC(C3), .K(K), .S(1), .P(PAD), .PE(PE3)) u_cce3 (
    .clk, .rst_n,
    .in_valid(r2_valid), .in_ready(r2_ready), .in_data(r2_data),
    .out_valid(c3_valid), .out_ready(c3_ready), .out_data(c3_data),
    .wb_en(cfg_en && cfg_sel == 3'd2), .wb_bias(cfg_bias), .wb_oc(cfg_a[15:0]),
    .wb_ic(cfg_b), .wb_kk(cfg_kk), .wb_data(cfg_data),
    .fold(c3_fold), .frame_done(c3_done)
  );

  stream_fifo #(.WIDTH(PE3*ACC_W), .DEPTH(FIFO_DEPTH)) u_f3 (
    .clk, .rst_n, .in_valid(c3_valid), .in_ready(c3_ready), .in_data(c3_data),
    .out_valid(m3i_valid), .out_ready(m3i_ready), .out_data(m3i_data)
  );

  logic m3_valid, m3_ready, m3_done;
  act_t [PE3-1:0] m3_data;
  mce #(.H(H3), .W(W3), .PE(PE3), .KM(KM)) u_mce3 (
    .clk, .rst_n, .bypass(1'b1), .quant(q_reg[2]),
    .in_valid(m3i_valid), .in_ready(m3i_ready), .in_data(m3i_data),
    .out_valid(m3_valid), .out_ready(m3_ready), .out_data(m3_data),
    .frame_done(m3_done)
  );

  logic g_in_valid, g_in_ready;
  act_t [PE3-1:0] g_in_data;
  stream_fifo #(.WIDTH(PE3*ACT_W), .DEPTH(FIFO_DEPTH)) u_f4 (
    .clk, .rst_n, .in_valid(m3_valid), .in_ready(m3_ready), .in_data(m3_data),
    .out_valid(g_in_valid), .out_ready(g_in_ready), .out_data(g_in_data)
  );

  // ---------------- fully connected layer: GCE ----------------
  logic g_valid, g_ready, g_done;
  acc_t [NCLS-1:0] g_data;
  gce #(.M(1), .KD(KD), .N(NCLS), .ROWS(1), .COLS(NCLS), .IN_VEC(PE3)) u_gce (
    .clk, .rst_n,
    .in_valid(g_in_valid), .in_ready(g_in_ready), .in_data(g_in_data),
    .out_valid(g_valid), .out_ready(g_ready), .out_data(g_data),
    .wb_en(cfg_en && cfg_sel == 3'd3), .wb_bias(cfg_bias), .wb_k(cfg_a),
    .wb_n(cfg_b), .wb_data(cfg_data),
    .frame_done(g_done)
  );

  result_buffer #(.NRES(NCLS), .VEC(NCLS)) u_res (
    .clk, .rst_n, .start,
    .in_valid(g_valid), .in_ready(g_ready), .in_data(g_data),
    .rd_addr(res_addr), .rd_data(res_data), .done(done)
  );
endmodule
