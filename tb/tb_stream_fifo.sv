// tb_stream_fifo: self-checking testbench of the inter-engine FIFO.
//
// Pushes 500 random words through a depth-4 FIFO with random producer gaps
// and random consumer back-pressure and compares the output sequence with a
// testbench queue; also checks that the FIFO reports full after DEPTH
// writes with no reads, and that a word written is readable the next cycle.
module tb_stream_fifo;
  localparam int WIDTH = 24, DEPTH = 4, NW = 500;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [WIDTH-1:0] in_data, out_data;

  stream_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [WIDTH-1:0] q [$];

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

  // scoreboard
  int nrecv = 0;
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) q.push_back(in_data);
    if (out_valid && out_ready) begin
      automatic logic [WIDTH-1:0] e = q.pop_front();
      check(out_data == e, $sformatf("word %0d got %h exp %h", nrecv, out_data, e));
      nrecv++;
    end
  end

  initial begin
    in_valid = 0; in_data = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // fill without reading
    for (int i = 0; i < DEPTH; i++) begin
      in_valid = 1; in_data = WIDTH'($urandom);
      @(posedge clk); #1;
      if (i == 0) check(out_valid, "word visible one cycle after write");
    end
    in_valid = 0;
    check(!in_ready, "full after DEPTH writes");
    // random traffic
    for (int i = 0; i < NW; i++) begin
      bit acc;
      in_valid = ($urandom % 4 != 0);
      if (in_valid) in_data = WIDTH'($urandom);
      out_ready = ($urandom % 3 != 0);
      acc = in_ready;
      @(posedge clk); #1;
      // hold a pending word stable as the handshake requires
      while (in_valid && !acc) begin
        out_ready = ($urandom % 3 != 0);
        acc = in_ready;
        @(posedge clk); #1;
      end
    end
    in_valid = 0; out_ready = 1;
    repeat (DEPTH + 2) @(posedge clk);
    #1 check(!out_valid && q.size() == 0, "drained");
    check(nrecv > NW / 2, "enough traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
