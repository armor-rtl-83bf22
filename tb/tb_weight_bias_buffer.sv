// tb_weight_bias_buffer: self-checking testbench of the weight/bias store.
//
// Writes random weights and biases for OC=7 output channels folded onto
// PE=3 lanes (3 folds), then reads back every (fold, input channel) word
// and checks all real lanes. Out-of-range writes (oc >= OC, ic >= IC,
// kk >= KK) must leave the contents unchanged.
module tb_weight_bias_buffer;
  import armor_pkg::*;
  localparam int PE = 3, OC = 7, IC = 2, KK = 4, FOLD = (OC + PE - 1) / PE;

  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_en, wr_bias;
  logic [15:0] wr_oc, wr_ic;
  logic [7:0]  wr_kk;
  logic [31:0] wr_data;
  logic [$clog2(FOLD+1)-1:0] rd_fold;
  logic [$clog2(IC+1)-1:0]   rd_ic;
  wgt_t rd_w [PE][KK];
  acc_t rd_b [PE];

  weight_bias_buffer #(.PE(PE), .OC(OC), .IC(IC), .KK(KK)) dut (.*);

  int checks = 0, failures = 0;
  wgt_t w_ref [OC][IC][KK];
  acc_t b_ref [OC];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input bit bias, input int oc, input int ic, input int kk, input int data);
    wr_en = 1; wr_bias = bias; wr_oc = 16'(oc); wr_ic = 16'(ic); wr_kk = 8'(kk);
    wr_data = 32'(data);
    @(posedge clk); #1 wr_en = 0;
  endtask

  task automatic read_all;
    for (int f = 0; f < FOLD; f++)
      for (int ic = 0; ic < IC; ic++) begin
        rd_fold = ($clog2(FOLD+1))'(f); rd_ic = ($clog2(IC+1))'(ic);
        #1;
        for (int p = 0; p < PE; p++) begin
          int oc;
          oc = f * PE + p;
          if (oc >= OC) continue;
          check(rd_b[p] == b_ref[oc], $sformatf("bias oc %0d", oc));
          for (int k = 0; k < KK; k++)
            check(rd_w[p][k] == w_ref[oc][ic][k], $sformatf("w oc %0d ic %0d k %0d", oc, ic, k));
        end
      end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_bias = 0; wr_oc = '0; wr_ic = '0; wr_kk = '0; wr_data = '0;
    rd_fold = '0; rd_ic = '0;
    @(posedge clk); #1;
    for (int oc = 0; oc < OC; oc++) begin
      b_ref[oc] = acc_t'($urandom);
      wr(1, oc, 0, 0, int'(b_ref[oc]));
      for (int ic = 0; ic < IC; ic++)
        for (int k = 0; k < KK; k++) begin
          w_ref[oc][ic][k] = wgt_t'($urandom);
          wr(0, oc, ic, k, int'(w_ref[oc][ic][k]));
        end
    end
    read_all();
    // writes outside the configured shape are ignored
    wr(1, OC, 0, 0, 32'h1234);
    wr(0, OC, 0, 0, 8'h55);
    wr(0, 0, IC, 0, 8'h55);
    wr(0, 0, 0, KK, 8'h55);
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
