// tb_batchnorm_unit: random and corner vectors for y*G + H against an
// integer reference (Q8.8 gain, arithmetic shift, 16-bit saturation).
module tb_batchnorm_unit;
  logic signed [15:0] y, g, h, ybn;
  int checks = 0, failures = 0;
  batchnorm_unit dut (.y, .g, .h, .ybn);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_bn(int yy, int gg, int hh);
    longint p = longint'(yy) * longint'(gg);
    longint s = (p >>> 8) + longint'(hh);
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return int'(s);
  endfunction

  task automatic check(int yy, int gg, int hh);
    y = 16'(yy); g = 16'(gg); h = 16'(hh);
    #1;
    checks++;
    if (int'(ybn) != ref_bn(int'(y), int'(g), int'(h))) begin
      failures++;
      $display("y=%0d g=%0d h=%0d: got %0d expected %0d", y, g, h, ybn, ref_bn(int'(y), int'(g), int'(h)));
    end
  endtask

  initial begin
    check(100, 256, 0);        // G = 1.0
    check(100, 128, 5);        // G = 0.5
    check(-7, 256, -3);
    check(-1, 1, 0);           // floor: -1/256 -> -1
    check(32767, 32767, 32767);
    check(-32768, 32767, -32768);
    check(-32768, -32768, 0);
    for (int i = 0; i < 5000; i++)
      check(int'($urandom) % 32768, int'($urandom) % 32768, int'($urandom) % 32768);
    for (int i = 0; i < 2000; i++)
      check($urandom_range(0, 2000) - 1000, $urandom_range(0, 1024) - 512, $urandom_range(0, 2000) - 1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
