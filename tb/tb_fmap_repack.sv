// tb_fmap_repack: self-checking testbench of the input repacking stage.
//
// A 3x4 feature map with 6 channels arrives fold-major, 4 lanes per beat
// (two groups, the second one partial), and must come out pixel-major with
// all 6 channels per beat, twice (REPLAY = 2). Two frames are sent, with
// random gaps and back-pressure on the second.
module tb_fmap_repack;
  import armor_pkg::*;
  localparam int H = 3, W = 4, C = 6, IN_VEC = 4, REPLAY = 2;
  localparam int NG = (C + IN_VEC - 1) / IN_VEC;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, frame_done;
  act_t [IN_VEC-1:0] in_data;
  act_t [C-1:0] out_data;

  fmap_repack #(.H(H), .W(W), .C(C), .IN_VEC(IN_VEC), .REPLAY(REPLAY)) dut (.*);

  int checks = 0, failures = 0;
  int fm [H*W][C];
  bit gaps;

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
    int ndone;
    in_valid = 0; in_data = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int fr = 0; fr < 2; fr++) begin
      gaps = (fr == 1);
      for (int p = 0; p < H*W; p++) for (int c = 0; c < C; c++) fm[p][c] = int'($urandom % 256) - 128;
      check(in_ready && !out_valid, "ready to fill");
      for (int g = 0; g < NG; g++)
        for (int p = 0; p < H*W; p++) begin
          while (gaps && $urandom % 3 == 0) begin in_valid = 0; @(posedge clk); #1; end
          in_valid = 1;
          for (int l = 0; l < IN_VEC; l++)
            in_data[l] = (g*IN_VEC + l < C) ? act_t'(fm[p][g*IN_VEC + l]) : act_t'($urandom);
          @(posedge clk); #1;
        end
      in_valid = 0;
      ndone = 0;
      for (int r = 0; r < REPLAY; r++)
        for (int p = 0; p < H*W; p++) begin
          out_ready = gaps ? 1'($urandom % 2) : 1'b1;
          while (!out_ready) begin @(posedge clk); #1; out_ready = 1'($urandom % 2); end
          check(out_valid, "valid while draining");
          for (int c = 0; c < C; c++)
            check(int'(out_data[c]) == fm[p][c], $sformatf("rep %0d pix %0d ch %0d got %0d exp %0d",
                  r, p, c, int'(out_data[c]), fm[p][c]));
          @(posedge clk); #1;
          if (frame_done) ndone++;
        end
      out_ready = 0;
      check(ndone == 1 && in_ready, "frame_done once, back to filling");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
