// tb_result_buffer: self-checking testbench of the result buffer.
//
// Writes 7 results as 3-wide beats (the last beat partial), reads them back
// through the read port, checks the done flag timing, then clears with
// start and repeats with new values.
module tb_result_buffer;
  import armor_pkg::*;
  localparam int NRES = 7, VEC = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, in_valid, in_ready, done;
  acc_t [VEC-1:0] in_data;
  logic [$clog2(NRES+1)-1:0] rd_addr;
  acc_t rd_data;

  result_buffer #(.NRES(NRES), .VEC(VEC)) dut (.*);

  int checks = 0, failures = 0;
  int vals [NRES+VEC];

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
    start = 0; in_valid = 0; in_data = '0; rd_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      @(posedge clk); start <= 1; @(posedge clk); start <= 0;
      @(posedge clk);
      #1 check(!done, "done clear after start");
      for (int i = 0; i < NRES + VEC; i++) vals[i] = int'($urandom);
      for (int b = 0; b < (NRES + VEC - 1) / VEC; b++) begin
        @(posedge clk);
        #1 check(!done, "done low before the last beat");
        in_valid <= 1;
        for (int j = 0; j < VEC; j++) in_data[j] <= acc_t'(vals[b*VEC + j]);
      end
      @(posedge clk);
      in_valid <= 0;
      @(posedge clk);
      #1 check(done, "done after last beat");
      check(in_ready, "always ready");
      for (int a = 0; a < NRES; a++) begin
        rd_addr = ($bits(rd_addr))'(a);
        #1 check(int'(rd_data) == vals[a], $sformatf("entry %0d got %0d exp %0d", a,
                 int'(rd_data), vals[a]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
