// tb_conv_pe: self-checking testbench of a convolution PE.
//
// Feeds 300 random 3x3 windows and weights, one per cycle with random idle
// cycles, and checks that each dot product appears exactly two cycles after
// its inputs, with out_valid high only then.
module tb_conv_pe;
  import armor_pkg::*;
  localparam int K = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  act_t win [K*K];
  wgt_t wgt [K*K];
  acc_t psum;

  conv_pe #(.K(K)) dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d1 = 0;
    bit v1 = 0;
    in_valid = 0;
    for (int i = 0; i < K*K; i++) begin win[i] = '0; wgt[i] = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int dot;
      dot = 0;
      in_valid = ($urandom % 4 != 0);
      for (int i = 0; i < K*K; i++) begin
        win[i] = act_t'($urandom); wgt[i] = wgt_t'($urandom);
        dot += int'(win[i]) * int'(wgt[i]);
      end
      @(posedge clk); #1;
      // inputs presented in cycle t appear in cycle t+2 (after two edges)
      check(out_valid == v1, $sformatf("out_valid %0d expected %0d", out_valid, v1));
      if (v1) check(int'(psum) == d1, $sformatf("psum %0d expected %0d", int'(psum), d1));
      v1 = in_valid; d1 = dot;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
