// tb_layer_input_select: copies random output-buffer contents for random
// layer shapes (in_ch channels of in_h x in_w, at most 1024 spikes) and source
// bases into a model of the input scratchpad, and compares every bit with
// the spike the output layout puts there: output byte
// src_base + 8*(o*nty*ntx + ty*ntx + tx) + r, bit c, for neuron
// (o, 8ty + r, 8tx + c). Bits beyond the layer are checked to stay as they
// were. It also checks the copy length: 'done' comes
// in_ch*nty*ntx*8 + 1 cycles after 'go'.
module tb_layer_input_select import sia_pkg::*;;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic go, busy, done, rd_en;
  logic [15:0] rd_addr;
  logic [7:0] rd_data, ld_we, ld_val;
  logic [7:0][9:0] ld_idx;
  layer_cfg_t cfg;
  int checks = 0, failures = 0;

  layer_input_select dut (.*);

  // behavioural output buffer (one-cycle read) and input scratchpad
  logic [7:0] omem [65536];
  logic [1023:0] ibits;
  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= omem[rd_addr];
    for (int c = 0; c < 8; c++) if (ld_we[c]) ibits[ld_idx[c]] <= ld_val[c];
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1023:0] prev_bits;
    go = 0; cfg = '0;
    for (int i = 0; i < 65536; i++) omem[i] = 8'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      automatic int ih = (n == 0) ? 32 : (n == 1) ? 1 : $urandom_range(1, 32);
      automatic int iw = (n == 0) ? 32 : (n == 1) ? 1 : $urandom_range(1, 32);
      automatic int maxc = 1024 / (ih * iw);
      automatic int nic = (n == 1) ? 64 : $urandom_range(1, maxc > 64 ? 64 : maxc);
      automatic int nty = (ih + 7) / 8, ntx = (iw + 7) / 8;
      automatic int src = (n == 2) ? 65536 - nic * nty * ntx * 8 : $urandom_range(0, 57344 - nic * nty * ntx * 8);
      automatic int t_go, t_done;
      @(negedge clk);
      for (int i = 0; i < 32; i++) ibits[i*32 +: 32] = $urandom;
      prev_bits = ibits;
      cfg = '0;
      cfg.in_h = 6'(ih); cfg.in_w = 6'(iw); cfg.in_ch = 7'(nic); cfg.src_base = 16'(src);
      go = 1;
      @(negedge clk);
      go = 0;
      t_go = 0;
      t_done = 0;
      while (!done) begin
        @(negedge clk);
        t_done++;
        if (t_done > 20000) break;
      end
      checks++;
      if (t_done != nic * nty * ntx * 8) begin
        failures++; $display("shape %0dx%0dx%0d: done after %0d cycles, expected %0d", nic, ih, iw, t_done + 1, nic * nty * ntx * 8 + 1);
      end
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("still busy after done"); end
      for (int o = 0; o < nic; o++)
        for (int y = 0; y < ih; y++)
          for (int x = 0; x < iw; x++) begin
            automatic int b = o * ih * iw + y * iw + x;
            automatic int a = src + 8 * (o * nty * ntx + (y / 8) * ntx + x / 8) + y % 8;
            checks++;
            if (ibits[b] !== omem[a][x % 8]) begin
              failures++;
              if (failures < 10) $display("shape %0dx%0dx%0d: bit (%0d,%0d,%0d) = %0d, expected %0d", nic, ih, iw, o, y, x, ibits[b], omem[a][x % 8]);
            end
          end
      for (int b = nic * ih * iw; b < 1024; b++) begin
        checks++;
        if (ibits[b] !== prev_bits[b]) begin failures++; $display("bit %0d beyond the layer changed", b); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
