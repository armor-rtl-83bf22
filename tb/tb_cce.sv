// tb_cce: self-checking testbench of the convolution compute engine.
//
// A small layer (6x5 input, 3 input channels, 5 output channels, 3x3 kernel,
// stride 2, padding 1) on 2 PEs, so three folds with a partial last fold.
// The expected outputs come from a direct nested-loop convolution in the
// testbench. Frame 1 runs at full rate and its cycle count is compared with
// FOLD*(IH*IW + OH*OW*(IC+4)); frame 2 runs with random input gaps and
// random output back-pressure.
module tb_cce;
  import armor_pkg::*;
  localparam int IH = 6, IW = 5, IC = 3, OC = 5, K = 3, S = 2, P = 1, PE = 2;
  localparam int OH = (IH + 2*P - K) / S + 1;
  localparam int OW = (IW + 2*P - K) / S + 1;
  localparam int FOLD = (OC + PE - 1) / PE;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, frame_done;
  act_t [IC-1:0] in_data;
  acc_t [PE-1:0] out_data;
  logic wb_en, wb_bias;
  logic [15:0] wb_oc, wb_ic;
  logic [7:0] wb_kk;
  logic [31:0] wb_data;
  logic [$clog2(FOLD+1)-1:0] fold;

  cce #(.IH(IH), .IW(IW), .IC(IC), .OC(OC), .K(K), .S(S), .P(P), .PE(PE)) dut (.*);

  int checks = 0, failures = 0;
  int img [IC][IH][IW];
  int wt  [OC][IC][K][K];
  int bs  [OC];
  int ref_out [OC][OH][OW];
  bit gaps;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producer: replays the frame once per fold
  task automatic send_frame();
    for (int f = 0; f < FOLD; f++)
      for (int r = 0; r < IH; r++)
        for (int c = 0; c < IW; c++) begin
          while (gaps && ($urandom % 3 == 0)) begin in_valid <= 0; @(posedge clk); end
          in_valid <= 1;
          for (int ch = 0; ch < IC; ch++) in_data[ch] <= act_t'(img[ch][r][c]);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
        end
    in_valid <= 0;
  endtask

  task automatic recv_frame();
    for (int f = 0; f < FOLD; f++)
      for (int oh = 0; oh < OH; oh++)
        for (int ow = 0; ow < OW; ow++) begin
          out_ready <= gaps ? ($urandom % 2) : 1'b1;
          @(posedge clk);
          while (!(out_valid && out_ready)) begin
            out_ready <= gaps ? ($urandom % 2) : 1'b1;
            @(posedge clk);
          end
          for (int p = 0; p < PE; p++) begin
            automatic int oc = f * PE + p;
            automatic int exp_v = (oc < OC) ? ref_out[oc][oh][ow] : 0;
            check(int'(out_data[p]) == exp_v,
                  $sformatf("f%0d oh%0d ow%0d p%0d got %0d exp %0d", f, oh, ow, p,
                            int'(out_data[p]), exp_v));
          end
        end
    out_ready <= 0;
  endtask

  initial begin
    int t0, t1, exp_cycles;
    in_valid = 0; out_ready = 0; wb_en = 0; wb_bias = 0;
    wb_oc = 0; wb_ic = 0; wb_kk = 0; wb_data = 0; in_data = '0;
    for (int c = 0; c < IC; c++) for (int r = 0; r < IH; r++) for (int w = 0; w < IW; w++)
      img[c][r][w] = int'($urandom % 256) - 128;
    for (int o = 0; o < OC; o++) begin
      bs[o] = int'($urandom % 2001) - 1000;
      for (int c = 0; c < IC; c++) for (int i = 0; i < K; i++) for (int j = 0; j < K; j++)
        wt[o][c][i][j] = int'($urandom % 256) - 128;
    end
    for (int o = 0; o < OC; o++) for (int oh = 0; oh < OH; oh++) for (int ow = 0; ow < OW; ow++) begin
      automatic int acc = bs[o];
      for (int c = 0; c < IC; c++) for (int i = 0; i < K; i++) for (int j = 0; j < K; j++) begin
        automatic int r = oh*S - P + i, w = ow*S - P + j;
        if (r >= 0 && r < IH && w >= 0 && w < IW) acc += wt[o][c][i][j] * img[c][r][w];
      end
      ref_out[o][oh][ow] = acc;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // preload weights and biases
    for (int o = 0; o < OC; o++) begin
      for (int c = 0; c < IC; c++) for (int i = 0; i < K; i++) for (int j = 0; j < K; j++) begin
        wb_en <= 1; wb_bias <= 0; wb_oc <= 16'(o); wb_ic <= 16'(c); wb_kk <= 8'(i*K+j);
        wb_data <= 32'(wt[o][c][i][j]);
        @(posedge clk);
      end
      wb_en <= 1; wb_bias <= 1; wb_oc <= 16'(o); wb_data <= 32'(bs[o]);
      @(posedge clk);
    end
    wb_en <= 0;
    @(posedge clk);

    // frame 1: full rate, cycle count
    gaps = 0;
    t0 = $time;
    fork send_frame(); recv_frame(); join
    while (!frame_done) @(posedge clk);
    t1 = $time;
    // +1: frame_done is registered one cycle after the last output
    exp_cycles = FOLD * (IH*IW + OH*OW*(IC+4)) + 1;
    check(((t1 - t0) / 10) == exp_cycles,
          $sformatf("cycles %0d expected %0d", (t1 - t0) / 10, exp_cycles));
    check(fold == 0, "fold counter wraps after last fold");

    // frame 2: random stalls on both sides
    gaps = 1;
    fork send_frame(); recv_frame(); join
    repeat (10) @(posedge clk);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
