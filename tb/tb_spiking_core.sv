// tb_spiking_core: drives the PE array the way the controller does, with a
// synchronous weight source, for several layer shapes (3x3, 5x5 and 11x11
// kernels, stride 1 and 2, one to three input channels, tiles at the map
// edge) and compares all 64 partial sums with a direct convolution computed
// here with zero padding. Checks the 3 + 1 cycle PE schedule for a 3x3
// kernel: psum_valid two cycles after the final command (one fetch stage).
module tb_spiking_core;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1023:0] spikes;
  logic acc_en, clr, fin, stride2;
  logic [9:0] ch_base;
  logic [5:0] in_w, in_h, oy0, ox0;
  logic [3:0] ksize, kr, kc;
  logic [2:0][7:0] w, w_next;
  logic [63:0][15:0] psum;
  logic psum_valid;
  logic signed [7:0] kern [3][11][11];
  int checks = 0, failures = 0;

  spiking_core dut (.clk, .rst_n, .spikes, .acc_en, .clr, .fin, .ch_base, .in_w, .in_h,
                    .ksize, .stride2, .oy0, .ox0, .kr, .kc, .w, .psum, .psum_valid);

  always_ff @(posedge clk) w <= w_next;   // the weight buffer's one-cycle read

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit spk_at(int c, int y, int x);
    if (y < 0 || x < 0 || y >= int'(in_h) || x >= int'(in_w)) return 0;
    return spikes[c * int'(in_h) * int'(in_w) + y * int'(in_w) + x];
  endfunction

  task automatic run_tile(int nic, int k, bit s2, int ty0, int tx0, bit check_lat);
    int pad = (k - 1) / 2, s = s2 ? 2 : 1, nseg = (k + 2) / 3, t_fin, lat;
    ksize = 4'(k); stride2 = s2; oy0 = 6'(ty0); ox0 = 6'(tx0);
    for (int c = 0; c < nic; c++)
      for (int r = 0; r < k; r++)
        for (int j = 0; j < nseg; j++) begin
          @(negedge clk);
          acc_en = 1; clr = (c == 0 && r == 0 && j == 0); fin = 0;
          ch_base = 10'(c * int'(in_h) * int'(in_w)); kr = 4'(r); kc = 4'(3 * j);
          for (int m = 0; m < 3; m++) w_next[m] = (3 * j + m < k) ? kern[c][r][3*j+m] : 8'sd0;
        end
    @(negedge clk);
    acc_en = 0; clr = 0; fin = 1;
    t_fin = $time;
    @(negedge clk);
    fin = 0;
    while (!psum_valid) @(negedge clk);
    lat = (int'($time) - t_fin) / 10;
    if (check_lat) begin
      checks++;
      if (lat != 2) begin failures++; $display("psum_valid %0d cycles after final command", lat); end
    end
    for (int r = 0; r < 8; r++)
      for (int cc = 0; cc < 8; cc++) begin
        automatic int e = 0;
        for (int c = 0; c < nic; c++)
          for (int a = 0; a < k; a++)
            for (int b = 0; b < k; b++)
              if (spk_at(c, (ty0 + r) * s + a - pad, (tx0 + cc) * s + b - pad)) e += kern[c][a][b];
        checks++;
        if (psum[r*8+cc] !== 16'(e)) begin
          failures++;
          $display("k%0d s%0d tile(%0d,%0d) pe(%0d,%0d): %0d expected %0d", k, s, ty0, tx0, r, cc,
                   signed'(psum[r*8+cc]), e);
        end
      end
  endtask

  task automatic randomize_data(int density);
    for (int i = 0; i < 1024; i++) spikes[i] = ($urandom_range(0, 99) < density);
    for (int c = 0; c < 3; c++)
      for (int a = 0; a < 11; a++)
        for (int b = 0; b < 11; b++) kern[c][a][b] = 8'($urandom);
  endtask

  initial begin
    acc_en = 0; clr = 0; fin = 0; ch_base = 0; kr = 0; kc = 0; w_next = '0;
    in_w = 10; in_h = 10; ksize = 3; stride2 = 0; oy0 = 0; ox0 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4; n++) begin
      randomize_data(30);
      in_w = 10; in_h = 10;
      run_tile(1, 3, 0, 0, 0, 1);
      run_tile(3, 3, 0, 8, 0, 0);
      run_tile(2, 3, 0, 0, 8, 0);
      in_w = 12; in_h = 12;
      run_tile(2, 5, 1, 0, 0, 0);
      run_tile(1, 11, 0, 8, 8, 0);
      in_w = 32; in_h = 32;
      run_tile(1, 3, 0, 24, 16, 0);
      run_tile(1, 7, 1, 8, 8, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
