// tb_line_buffer: self-checking testbench of the circular line buffer.
//
// Streams two random 7x5x2 frames row by row. After each row is committed it
// reads every KxK window whose bottom row is that row, for every column
// offset (including the left/right padding columns) and every channel, and
// compares with a reference image with zeros outside the frame. Also checks
// that the head pointer advances once per row, wraps at K and is reset by
// frame_start.
module tb_line_buffer;
  import armor_pkg::*;
  localparam int K = 3, IH = 7, IW = 5, IC = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic frame_start, wr_en, wr_row_done;
  logic [$clog2(IW+1)-1:0] wr_col;
  act_t wr_data [IC];
  logic signed [15:0] rd_top, rd_left;
  logic [$clog2(IC+1)-1:0] rd_ch;
  act_t win [K*K];
  logic [$clog2(K+1)-1:0] head;

  line_buffer #(.K(K), .IH(IH), .IW(IW), .IC(IC)) dut (.*);

  int checks = 0, failures = 0;
  act_t img [IH][IW][IC];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic act_t pix(input int r, input int c, input int ch);
    if (r < 0 || r >= IH || c < 0 || c >= IW) return '0;
    return img[r][c][ch];
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    frame_start = 0; wr_en = 0; wr_row_done = 0; wr_col = '0;
    rd_top = '0; rd_left = '0; rd_ch = '0;
    for (int c = 0; c < IC; c++) wr_data[c] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      foreach (img[r, c, ch]) img[r][c][ch] = act_t'($urandom);
      frame_start = 1;
      @(posedge clk); #1 frame_start = 0;
      check(head == 0, "head not reset by frame_start");
      for (int r = 0; r < IH; r++) begin
        check(int'(head) == r % K, $sformatf("head %0d at row %0d", head, r));
        for (int c = 0; c < IW; c++) begin
          wr_en = 1; wr_col = ($clog2(IW+1))'(c);
          for (int ch = 0; ch < IC; ch++) wr_data[ch] = img[r][c][ch];
          wr_row_done = (c == IW - 1);
          @(posedge clk); #1;
        end
        wr_en = 0; wr_row_done = 0;
        // all windows whose bottom row is r (top row may be the padding row -1)
        for (int t = r - K + 1; t <= r - K + 2 && t <= r; t++) begin
          if (t < -1) continue;
          for (int l = -1; l <= IW - K + 1; l++)
            for (int ch = 0; ch < IC; ch++) begin
              rd_top = 16'(t); rd_left = 16'(l); rd_ch = ($clog2(IC+1))'(ch);
              #1;
              for (int kh = 0; kh < K; kh++)
                for (int kw = 0; kw < K; kw++) begin
                  // rows above t+K-1 that are below r are not yet written
                  if (t + kh > r) continue;
                  check(win[kh*K+kw] == pix(t + kh, l + kw, ch),
                        $sformatf("f%0d row %0d win(%0d,%0d,ch%0d)[%0d,%0d] got %0d exp %0d",
                                  f, r, t, l, ch, kh, kw, win[kh*K+kw], pix(t + kh, l + kw, ch)));
                end
            end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
