// tb_mce: self-checking testbench of the max-pooling compute engine.
//
// A 7x8 frame of 3-lane 32-bit values is pooled with overlapping 3x3
// windows at stride 2 (the last column is dropped) and requantized; then the same frame is sent with
// bypass set, so every pixel is only requantized. Expected values come from
// a direct max over each window and an independent 64-bit requantization in
// the testbench. The first frame runs with the output always ready and must
// be accepted at one pixel per cycle (H*W cycles); the others run with
// random input gaps and output back-pressure.
module tb_mce;
  import armor_pkg::*;
  localparam int H = 7, W = 8, PE = 3, KM = 3, SM = 2;
  localparam int OH = (H - KM) / SM + 1, OW = (W - KM) / SM + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic bypass, in_valid, in_ready, out_valid, out_ready, frame_done;
  quant_t quant;
  acc_t [PE-1:0] in_data;
  act_t [PE-1:0] out_data;

  mce #(.H(H), .W(W), .PE(PE), .KM(KM), .SM(SM)) dut (.*);

  int checks = 0, failures = 0;
  int img [H][W][PE];
  bit gaps;
  int stall_cycles = 0;
  always @(posedge clk) if (rst_n && !gaps && in_valid && !in_ready) stall_cycles++;

  function automatic int rq(input int x, input int unsigned m, input int sh, input int zp);
    longint v = longint'(x) * longint'(m);
    if (sh > 0) v = (v + (longint'(1) << (sh - 1))) >>> sh;
    v = v + zp;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return int'(v);
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #500000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send();
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        while (gaps && ($urandom % 3 == 0)) begin in_valid <= 0; @(posedge clk); end
        in_valid <= 1;
        for (int p = 0; p < PE; p++) in_data[p] <= acc_t'(img[r][c][p]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    in_valid <= 0;
  endtask

  task automatic recv(input bit byp);
    int n = byp ? H * W : OH * OW;
    for (int i = 0; i < n; i++) begin
      out_ready <= gaps ? ($urandom % 2) : 1'b1;
      @(posedge clk);
      while (!(out_valid && out_ready)) begin
        out_ready <= gaps ? ($urandom % 2) : 1'b1;
        @(posedge clk);
      end
      for (int p = 0; p < PE; p++) begin
        automatic int e;
        if (byp) e = rq(img[i / W][i % W][p], quant.mult, int'(quant.shift), int'(quant.zero_point));
        else begin
          automatic int oh = i / OW, ow = i % OW, m = img[oh*SM][ow*SM][p];
          for (int a = 0; a < KM; a++) for (int b = 0; b < KM; b++)
            if (img[oh*SM+a][ow*SM+b][p] > m) m = img[oh*SM+a][ow*SM+b][p];
          e = rq(m, quant.mult, int'(quant.shift), int'(quant.zero_point));
        end
        check(int'(out_data[p]) == e, $sformatf("byp%0d i%0d p%0d got %0d exp %0d",
              byp, i, p, int'(out_data[p]), e));
      end
    end
    out_ready <= 0;
  endtask

  initial begin
    int t0;
    in_valid = 0; out_ready = 0; bypass = 0; in_data = '0;
    quant.mult = 32'd1518500250; quant.shift = 6'd38; quant.zero_point = -8'sd5;
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) for (int p = 0; p < PE; p++)
      img[r][c][p] = int'($urandom % 60001) - 30000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    gaps = 0;
    t0 = $time;
    fork send(); recv(0); join
    // all inputs accepted back to back: one pixel per cycle
    check(stall_cycles == 0, $sformatf("%0d input stall cycles at full rate", stall_cycles));
    check(($time - t0) / 10 >= H * W && ($time - t0) / 10 <= H * W + 2, "frame time H*W cycles");
    repeat (2) @(posedge clk);

    gaps = 1;
    fork send(); recv(0); join
    repeat (2) @(posedge clk);
    bypass = 1;
    fork send(); recv(1); join
    repeat (5) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
