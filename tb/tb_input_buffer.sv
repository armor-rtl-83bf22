// tb_input_buffer: self-checking testbench of the input image buffer.
//
// Writes a random 5x6 two-channel image, starts streaming with REPLAY = 2,
// and checks that the image comes out twice in row-major order under random
// back-pressure, that busy drops afterwards, and that a start during
// streaming is ignored.
module tb_input_buffer;
  import armor_pkg::*;
  localparam int H = 5, W = 6, C = 2, REPLAY = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en, start, out_valid, out_ready, busy;
  logic [$clog2(H*W)-1:0] wr_addr;
  act_t [C-1:0] wr_data, out_data;

  input_buffer #(.H(H), .W(W), .C(C), .REPLAY(REPLAY)) dut (.*);

  int checks = 0, failures = 0;
  int im [H*W][C];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_addr = '0; wr_data = '0; start = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int p = 0; p < H*W; p++) begin
      for (int c = 0; c < C; c++) im[p][c] = int'($urandom % 256) - 128;
      wr_en = 1; wr_addr = ($bits(wr_addr))'(p);
      for (int c = 0; c < C; c++) wr_data[c] = act_t'(im[p][c]);
      @(posedge clk); #1;
    end
    wr_en = 0;
    check(!busy && !out_valid, "idle before start");
    start = 1; @(posedge clk); #1; start = 0;
    for (int r = 0; r < REPLAY; r++)
      for (int p = 0; p < H*W; p++) begin
        out_ready = 1'($urandom % 2);
        while (!out_ready) begin
          start = (p == 3);   // must be ignored while streaming
          @(posedge clk); #1; start = 0;
          out_ready = 1'($urandom % 2);
        end
        check(out_valid, "valid while streaming");
        for (int c = 0; c < C; c++)
          check(int'(out_data[c]) == im[p][c], $sformatf("rep %0d pix %0d ch %0d", r, p, c));
        @(posedge clk); #1;
      end
    out_ready = 0;
    check(!busy && !out_valid, "idle after REPLAY frames");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
