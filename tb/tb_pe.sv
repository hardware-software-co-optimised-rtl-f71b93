// tb_pe: self-checking test of one processing element.
// Runs random 3x3 and longer kernel sequences (3 weights per accumulate
// cycle), compares the partial sum with a saturating reference sum computed
// here, checks that a 3-row kernel delivers psum_valid exactly 3 + 1 cycles
// after its first accumulate cycle, and checks saturation at both limits.
module tb_pe;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [2:0][7:0] w;
  logic [2:0] spk;
  logic acc_en = 0, clr = 0, fin = 0;
  logic signed [15:0] psum;
  logic psum_valid;
  int checks = 0, failures = 0;

  pe dut (.clk, .rst_n, .w, .spk, .acc_en, .clr, .fin, .psum, .psum_valid);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(int v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  // runs 'rows' accumulate cycles and one final cycle; returns the cycle count
  task automatic run(input int rows, input bit force_w, input logic [7:0] fw, output int expect_v,
                     output int lat);
    automatic int acc = 0;
    int t0;
    for (int r = 0; r < rows; r++) begin
      @(negedge clk);
      for (int m = 0; m < 3; m++) begin
        w[m]   = force_w ? fw : 8'($urandom);
        spk[m] = force_w ? 1'b1 : 1'($urandom);
      end
      acc_en = 1; clr = (r == 0);
      begin
        automatic int s = (r == 0) ? 0 : acc;
        for (int m = 0; m < 3; m++) if (spk[m]) s += int'(signed'(w[m]));
        acc = sat(s);
      end
      if (r == 0) t0 = $time;
    end
    @(negedge clk);
    acc_en = 0; clr = 0; fin = 1;
    @(negedge clk);
    fin = 0;
    lat = 0;
    while (!psum_valid) begin @(negedge clk); lat++; end
    lat = (int'($time) - t0) / 10;
    expect_v = acc;
  endtask

  initial begin
    int e, lat;
    w = '0; spk = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      run(3, 0, 0, e, lat);
      checks++;
      if (psum !== 16'(e)) begin failures++; $display("3x3 %0d: psum %0d expected %0d", n, psum, e); end
      checks++;
      if (lat != 4) begin failures++; $display("3x3 latency %0d cycles, expected 3+1", lat); end
    end
    for (int n = 0; n < 100; n++) begin
      run(1 + $urandom_range(0, 40), 0, 0, e, lat);
      checks++;
      if (psum !== 16'(e)) begin failures++; $display("long %0d: psum %0d expected %0d", n, psum, e); end
    end
    run(120, 1, 8'd127, e, lat);   // 120*381 > 32767
    checks++; if (psum !== 16'sd32767) begin failures++; $display("no positive saturation: %0d", psum); end
    run(120, 1, 8'h80, e, lat);    // -128
    checks++; if (psum !== -16'sd32768) begin failures++; $display("no negative saturation: %0d", psum); end
    // psum holds between final cycles
    repeat (5) @(negedge clk);
    checks++; if (psum !== -16'sd32768 || psum_valid) begin failures++; $display("psum not held"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
