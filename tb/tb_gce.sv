// tb_gce: self-checking testbench of the GEMM compute engine.
//
// A 5x8 by 8x7 product with bias on a 2x3 systolic array, so both tile
// dimensions have partial last tiles. Expected values are computed with
// plain loops in the testbench. Run 1 (consumer always ready, input at full
// rate) checks the cycle count BEATS + MT*NT*(1 + KD+ROWS+COLS-2) + M*NT;
// run 2 uses new activations with random gaps and back-pressure.
module tb_gce;
  import armor_pkg::*;
  localparam int M = 5, KD = 8, N = 7, ROWS = 2, COLS = 3, IN_VEC = 4;
  localparam int MT = (M + ROWS - 1) / ROWS, NT = (N + COLS - 1) / COLS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, frame_done;
  act_t [IN_VEC-1:0] in_data;
  acc_t [COLS-1:0] out_data;
  logic wb_en, wb_bias;
  logic [23:0] wb_k;
  logic [15:0] wb_n;
  logic [31:0] wb_data;

  gce #(.M(M), .KD(KD), .N(N), .ROWS(ROWS), .COLS(COLS), .IN_VEC(IN_VEC)) dut (.*);

  int checks = 0, failures = 0;
  int A [M][KD];
  int B [KD][N];
  int bs [N];
  bit gaps;

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
    for (int i = 0; i < M * KD; i += IN_VEC) begin
      while (gaps && ($urandom % 3 == 0)) begin in_valid <= 0; @(posedge clk); end
      in_valid <= 1;
      for (int j = 0; j < IN_VEC; j++) in_data[j] <= act_t'(A[(i+j) / KD][(i+j) % KD]);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    in_valid <= 0;
  endtask

  task automatic recv();
    for (int mt = 0; mt < MT; mt++)
      for (int nt = 0; nt < NT; nt++)
        for (int r = 0; r < ROWS; r++) begin
          automatic int m = mt * ROWS + r;
          if (m >= M) continue;
          out_ready <= gaps ? 1'($urandom % 2) : 1'b1;
          @(posedge clk);
          while (!(out_valid && out_ready)) begin
            out_ready <= gaps ? 1'($urandom % 2) : 1'b1;
            @(posedge clk);
          end
          for (int c = 0; c < COLS; c++) begin
            automatic int n = nt * COLS + c;
            automatic int e = 0;
            if (n < N) begin
              e = bs[n];
              for (int k = 0; k < KD; k++) e += A[m][k] * B[k][n];
            end
            check(int'(out_data[c]) == e, $sformatf("m%0d n%0d got %0d exp %0d", m, n,
                  int'(out_data[c]), e));
          end
        end
    out_ready <= 0;
  endtask

  task automatic new_a();
    for (int m = 0; m < M; m++) for (int k = 0; k < KD; k++) A[m][k] = int'($urandom % 256) - 128;
  endtask

  initial begin
    longint t0, cyc, exp_c;
    in_valid = 0; out_ready = 0; wb_en = 0; wb_bias = 0; wb_k = 0; wb_n = 0; wb_data = 0;
    in_data = '0;
    new_a();
    for (int k = 0; k < KD; k++) for (int n = 0; n < N; n++) B[k][n] = int'($urandom % 256) - 128;
    for (int n = 0; n < N; n++) bs[n] = int'($urandom % 20001) - 10000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < KD; k++) for (int n = 0; n < N; n++) begin
      wb_en <= 1; wb_bias <= 0; wb_k <= 24'(k); wb_n <= 16'(n); wb_data <= 32'(B[k][n]);
      @(posedge clk);
    end
    for (int n = 0; n < N; n++) begin
      wb_en <= 1; wb_bias <= 1; wb_n <= 16'(n); wb_data <= 32'(bs[n]);
      @(posedge clk);
    end
    wb_en <= 0;
    @(posedge clk);

    gaps = 0;
    t0 = $time;
    fork send(); recv(); join
    cyc = ($time - t0) / 10;
    exp_c = M * KD / IN_VEC + MT * NT * (1 + KD + ROWS + COLS - 2) + M * NT;
    check(cyc == exp_c, $sformatf("cycles %0d expected %0d", cyc, exp_c));

    gaps = 1;
    new_a();
    fork send(); recv(); join
    repeat (5) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
