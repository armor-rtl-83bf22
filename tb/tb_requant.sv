// tb_requant: self-checking testbench of the requantizer.
//
// 2000 random accumulator values and random scale/shift/zero-point sets,
// plus hand-picked rounding and saturation cases, compared with an
// independent reference: the exact rational x*mult/2^shift rounded half up
// (computed with a 128-bit division), plus zero point, clamped to INT8.
module tb_requant;
  import armor_pkg::*;

  acc_t   x;
  quant_t q;
  act_t   y;

  requant dut (.*);

  int checks = 0, failures = 0;

  function automatic int ref_rq(input int xv, input int unsigned m, input int sh, input int zp);
    logic signed [127:0] num, den, quo;
    num = 128'(longint'(xv)) * 128'(longint'(m));
    den = 128'sd1 <<< sh;
    // floor((num + den/2) / den) for either sign of num
    num = num + (den >>> 1);
    quo = num / den;
    if (num < 0 && (quo * den != num)) quo = quo - 1;
    quo = quo + zp;
    if (quo > 127) return 127;
    if (quo < -128) return -128;
    return int'(quo);
  endfunction

  task automatic run(input int xv, input int unsigned m, input int sh, input int zp);
    int e;
    x = acc_t'(xv); q.mult = m; q.shift = QSH_W'(sh); q.zero_point = act_t'(zp);
    #1;
    e = ref_rq(xv, m, sh, zp);
    checks++;
    if (int'(y) != e) begin
      failures++;
      $display("FAIL: x=%0d m=%0d sh=%0d zp=%0d got %0d exp %0d", xv, m, sh, zp, int'(y), e);
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
    run(3, 1, 1, 0);        // 1.5 -> 2
    run(-3, 1, 1, 0);       // -1.5 -> -1 (half up)
    run(5, 1, 2, 0);        // 1.25 -> 1
    run(1000, 1, 0, 0);     // saturate high
    run(-1000, 1, 0, 0);    // saturate low
    run(100, 1, 0, 27);     // zero point pushes into saturation
    run(0, 12345, 20, -7);
    for (int i = 0; i < 2000; i++)
      run(int'($urandom), $urandom, int'($urandom % 48), int'($urandom % 256) - 128);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
