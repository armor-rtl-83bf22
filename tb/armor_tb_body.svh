// Shared body of the end-to-end accelerator testbenches. The including
// module declares the localparams IMG_H, IMG_W, C1, C2, C3, K, PAD, PE1,
// PE2, PE3, KM, NCLS, NIMG and WATCHDOG, and instantiates armor_top as
// `dut` with the ports declared here.
//
// For each of NIMG random images the testbench preloads random weights,
// biases and requantization constants, streams the image, and compares the
// NCLS logits with a golden model of the same network written as plain
// loops (convolution with zero padding, 2x2 max pooling, requantization,
// fully connected layer). It also counts how often each mechanism of the
// accelerator fired (input back-pressure, line-buffer wrap, channel
// folding, frame replay for a folded layer, max pooling, pooling bypass,
// GEMM) and counts a failure for any that never did.

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                            img_we;
  logic [$clog2(IMG_H*IMG_W)-1:0]  img_addr;
  act_t                            img_data;
  logic        cfg_en, cfg_bias;
  logic [2:0]  cfg_sel;
  logic [23:0] cfg_a;
  logic [15:0] cfg_b;
  logic [7:0]  cfg_kk;
  logic [31:0] cfg_data;
  logic        start, busy, done;
  logic [$clog2(NCLS+1)-1:0] res_addr;
  acc_t        res_data;

  localparam int H1 = IMG_H + 2*PAD - K + 1, W1 = IMG_W + 2*PAD - K + 1;
  localparam int HP1 = H1 / KM, WP1 = W1 / KM;
  localparam int H2 = HP1 + 2*PAD - K + 1, W2 = WP1 + 2*PAD - K + 1;
  localparam int HP2 = H2 / KM, WP2 = W2 / KM;
  localparam int H3 = HP2 + 2*PAD - K + 1, W3 = WP2 + 2*PAD - K + 1;
  localparam int KD = H3 * W3 * C3;

  int checks = 0, failures = 0;

  // golden-model storage
  int img [IMG_H][IMG_W];
  int w1 [C1][1][K*K];
  int w2 [C2][C1][K*K];
  int w3 [C3][C2][K*K];
  int b1 [C1];
  int b2 [C2];
  int b3 [C3];
  int wf [KD][NCLS];
  int bf [NCLS];
  int qm [3], qs [3], qz [3];
  int a1 [C1][HP1][WP1];
  int a2 [C2][HP2][WP2];
  int a3 [C3][H3][W3];
  int logits [NCLS];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int rq(input longint x, input int layer);
    longint v = x * longint'(qm[layer]);
    if (qs[layer] > 0) v = (v + (longint'(1) << (qs[layer] - 1))) >>> qs[layer];
    v = v + qz[layer];
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return int'(v);
  endfunction

  // golden model
  task automatic golden();
    // layer 1: conv + pool + requant
    for (int o = 0; o < C1; o++)
      for (int ph = 0; ph < HP1; ph++) for (int pw = 0; pw < WP1; pw++) begin
        automatic int mx = 0;
        for (int a = 0; a < KM; a++) for (int b = 0; b < KM; b++) begin
          automatic int oh = ph*KM + a, ow = pw*KM + b, acc = b1[o];
          for (int i = 0; i < K; i++) for (int j = 0; j < K; j++) begin
            automatic int r = oh - PAD + i, c = ow - PAD + j;
            if (r >= 0 && r < IMG_H && c >= 0 && c < IMG_W) acc += w1[o][0][i*K+j] * img[r][c];
          end
          if ((a == 0 && b == 0) || acc > mx) mx = acc;
        end
        a1[o][ph][pw] = rq(mx, 0);
      end
    // layer 2
    for (int o = 0; o < C2; o++)
      for (int ph = 0; ph < HP2; ph++) for (int pw = 0; pw < WP2; pw++) begin
        automatic int mx = 0;
        for (int a = 0; a < KM; a++) for (int b = 0; b < KM; b++) begin
          automatic int oh = ph*KM + a, ow = pw*KM + b, acc = b2[o];
          for (int ci = 0; ci < C1; ci++)
            for (int i = 0; i < K; i++) for (int j = 0; j < K; j++) begin
              automatic int r = oh - PAD + i, c = ow - PAD + j;
              if (r >= 0 && r < HP1 && c >= 0 && c < WP1) acc += w2[o][ci][i*K+j] * a1[ci][r][c];
            end
          if ((a == 0 && b == 0) || acc > mx) mx = acc;
        end
        a2[o][ph][pw] = rq(mx, 1);
      end
    // layer 3: conv + requant (no pooling)
    for (int o = 0; o < C3; o++)
      for (int oh = 0; oh < H3; oh++) for (int ow = 0; ow < W3; ow++) begin
        automatic int acc = b3[o];
        for (int ci = 0; ci < C2; ci++)
          for (int i = 0; i < K; i++) for (int j = 0; j < K; j++) begin
            automatic int r = oh - PAD + i, c = ow - PAD + j;
            if (r >= 0 && r < HP2 && c >= 0 && c < WP2) acc += w3[o][ci][i*K+j] * a2[ci][r][c];
          end
        a3[o][oh][ow] = rq(acc, 2);
      end
    // fully connected: k = (h*W3 + w)*C3 + c
    for (int n = 0; n < NCLS; n++) begin
      logits[n] = bf[n];
      for (int h = 0; h < H3; h++) for (int w = 0; w < W3; w++) for (int c = 0; c < C3; c++)
        logits[n] += a3[c][h][w] * wf[(h*W3 + w)*C3 + c][n];
    end
  endtask

  task automatic cfg(input int sel, input bit bias, input int a, input int b, input int kk,
                     input int data);
    cfg_en = 1; cfg_sel = 3'(sel); cfg_bias = bias; cfg_a = 24'(a); cfg_b = 16'(b);
    cfg_kk = 8'(kk); cfg_data = 32'(data);
    @(posedge clk);
    #1 cfg_en = 0;
  endtask

  task automatic randomize_model();
    for (int r = 0; r < IMG_H; r++) for (int c = 0; c < IMG_W; c++) img[r][c] = int'($urandom % 128);
    for (int o = 0; o < C1; o++) begin
      b1[o] = int'($urandom % 2001) - 1000;
      for (int i = 0; i < K*K; i++) w1[o][0][i] = int'($urandom % 32) - 16;
    end
    for (int o = 0; o < C2; o++) begin
      b2[o] = int'($urandom % 2001) - 1000;
      for (int ci = 0; ci < C1; ci++) for (int i = 0; i < K*K; i++) w2[o][ci][i] = int'($urandom % 32) - 16;
    end
    for (int o = 0; o < C3; o++) begin
      b3[o] = int'($urandom % 2001) - 1000;
      for (int ci = 0; ci < C2; ci++) for (int i = 0; i < K*K; i++) w3[o][ci][i] = int'($urandom % 32) - 16;
    end
    for (int k = 0; k < KD; k++) for (int n = 0; n < NCLS; n++) wf[k][n] = int'($urandom % 256) - 128;
    for (int n = 0; n < NCLS; n++) bf[n] = int'($urandom % 200001) - 100000;
    qm[0] = 3; qs[0] = 9;  qz[0] = -20;
    qm[1] = 5; qs[1] = 12; qz[1] = 3;
    qm[2] = 7; qs[2] = 13; qz[2] = 0;
  endtask

  task automatic load_model();
    for (int o = 0; o < C1; o++) begin
      for (int i = 0; i < K*K; i++) begin
        cfg(0, 0, o, 0, i, w1[o][0][i]);
      end
      cfg(0, 1, o, 0, 0, b1[o]);
    end
    for (int o = 0; o < C2; o++) begin
      for (int ci = 0; ci < C1; ci++) begin
        for (int i = 0; i < K*K; i++) begin
          cfg(1, 0, o, ci, i, w2[o][ci][i]);
        end
      end
      cfg(1, 1, o, 0, 0, b2[o]);
    end
    for (int o = 0; o < C3; o++) begin
      for (int ci = 0; ci < C2; ci++) begin
        for (int i = 0; i < K*K; i++) begin
          cfg(2, 0, o, ci, i, w3[o][ci][i]);
        end
      end
      cfg(2, 1, o, 0, 0, b3[o]);
    end
    for (int k = 0; k < KD; k++) begin
      for (int n = 0; n < NCLS; n++) begin
        cfg(3, 0, k, n, 0, wf[k][n]);
      end
    end
    for (int n = 0; n < NCLS; n++) begin
      cfg(3, 1, 0, n, 0, bf[n]);
    end
    for (int l = 0; l < 3; l++) begin
      cfg(4, 0, l, 0, 0, qm[l]);
      cfg(4, 0, l, 0, 1, qs[l]);
      cfg(4, 0, l, 0, 2, qz[l]);
    end
    for (int r = 0; r < IMG_H; r++) begin
      for (int c = 0; c < IMG_W; c++) begin
        img_we = 1;
        img_addr = ($clog2(IMG_H*IMG_W))'(r*IMG_W + c);
        img_data = act_t'(img[r][c]);
        @(posedge clk);
        #1;
      end
    end
    img_we = 0;
  endtask

  // mechanism counters
  int n_in_stall = 0, n_lb_wrap = 0, n_fold = 0, n_replay = 0, n_pool = 0, n_bypass = 0,
      n_gemm = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_in.out_valid && !dut.u_in.out_ready) n_in_stall++;
    if (dut.u_cce1.u_lb.wr_row_done && dut.u_cce1.u_lb.head == ($bits(dut.u_cce1.u_lb.head))'(K-1))
      n_lb_wrap++;
    if (dut.u_cce2.out_valid && dut.u_cce2.out_ready && dut.u_cce2.fold != 0) n_fold++;
    if (dut.u_rp1.out_valid && dut.u_rp1.out_ready && dut.u_rp1.rep != 0) n_replay++;
    if (dut.u_mce1.out_valid && dut.u_mce1.out_ready && !dut.u_mce1.bypass) n_pool++;
    if (dut.u_mce3.out_valid && dut.u_mce3.out_ready && dut.u_mce3.bypass) n_bypass++;
    if (dut.u_gce.frame_done) n_gemm++;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0, t1;
    img_we = 0; img_addr = '0; img_data = '0; cfg_en = 0; cfg_sel = '0; cfg_bias = 0;
    cfg_a = '0; cfg_b = '0; cfg_kk = '0; cfg_data = '0; start = 0; res_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int im = 0; im < NIMG; im++) begin
      randomize_model();
      golden();
      load_model();
      @(posedge clk);
      #1 start = 1;
      t0 = $time;
      @(posedge clk);
      #1 start = 0;
      repeat (2) @(posedge clk);
      while (!done) @(posedge clk);
      t1 = $time;
      $display("image %0d: inference took %0d cycles", im, (t1 - t0) / 10);
      for (int n = 0; n < NCLS; n++) begin
        res_addr <= ($bits(res_addr))'(n);
        @(posedge clk);
        #1;
        check(int'(res_data) == logits[n], $sformatf("image %0d logit %0d (addr %0d mem %p) got %0d exp %0d", dut.u_res.rd_addr, dut.u_res.mem,
              im, n, int'(res_data), logits[n]));
      end
      repeat (20) @(posedge clk);
      check(!busy, "input buffer idle after inference");
    end
    $display("mechanisms: input_stall=%0d line_buffer_wrap=%0d fold=%0d replay=%0d pool=%0d bypass=%0d gemm_runs=%0d",
             n_in_stall, n_lb_wrap, n_fold, n_replay, n_pool, n_bypass, n_gemm);
    check(n_in_stall > 0, "input back-pressure never happened");
    check(n_lb_wrap > 0,  "line buffer head never wrapped");
    check(n_fold > 0,     "channel folding never happened");
    check(n_replay > 0,   "frame replay never happened");
    check(n_pool > 0,     "max pooling never happened");
    check(n_bypass > 0,   "pooling bypass never happened");
    check(n_gemm > 0,     "GEMM engine never ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
