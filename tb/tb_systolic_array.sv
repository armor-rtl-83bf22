// tb_systolic_array: self-checking testbench of the output-stationary array.
//
// Computes C = A x B for three random INT8 problems (ROWS x KD times
// KD x COLS) by feeding A skewed by row from the left and B skewed by column
// from the top, after a one-cycle clear. Checks every accumulator exactly
// KD+ROWS+COLS-2 cycles after the first beat, and checks that the corner PE
// is still one product short one cycle earlier (timing check).
module tb_systolic_array;
  import armor_pkg::*;
  localparam int ROWS = 3, COLS = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear;
  act_t a_left [ROWS];
  wgt_t b_top  [COLS];
  acc_t acc    [ROWS][COLS];

  systolic_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic run(input int kd);
    act_t a [][];
    wgt_t b [][];
    int   cref [ROWS][COLS];
    int   tlast;
    a = new[ROWS];
    foreach (a[r]) a[r] = new[kd];
    b = new[kd];
    foreach (b[k]) b[k] = new[COLS];
    foreach (cref[r, c]) cref[r][c] = 0;
    for (int r = 0; r < ROWS; r++) for (int k = 0; k < kd; k++) a[r][k] = act_t'($urandom);
    for (int k = 0; k < kd; k++) for (int c = 0; c < COLS; c++) b[k][c] = wgt_t'($urandom);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        for (int k = 0; k < kd; k++) cref[r][c] += int'(a[r][k]) * int'(b[k][c]);
    clear = 1;
    @(posedge clk); #1 clear = 0;
    tlast = kd + ROWS + COLS - 2;
    for (int t = 0; t < tlast; t++) begin
      for (int r = 0; r < ROWS; r++) a_left[r] = (t - r >= 0 && t - r < kd) ? a[r][t - r] : '0;
      for (int c = 0; c < COLS; c++) b_top[c]  = (t - c >= 0 && t - c < kd) ? b[t - c][c] : '0;
      @(posedge clk); #1;
      if (t == tlast - 2)
        check(acc[ROWS-1][COLS-1] == acc_t'(cref[ROWS-1][COLS-1] -
                                            int'(a[ROWS-1][kd-1]) * int'(b[kd-1][COLS-1])),
              "corner PE finished early");
    end
    foreach (a_left[r]) a_left[r] = '0;
    foreach (b_top[c])  b_top[c]  = '0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        check(acc[r][c] == acc_t'(cref[r][c]),
              $sformatf("kd %0d C[%0d][%0d] got %0d exp %0d", kd, r, c, acc[r][c], cref[r][c]));
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0;
    foreach (a_left[r]) a_left[r] = '0;
    foreach (b_top[c])  b_top[c]  = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run(5);
    run(17);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
