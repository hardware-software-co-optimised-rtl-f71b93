// tb_sia_top: end-to-end test of the accelerator at its default sizes.
//
// Acts as the processor: over AXI4-Lite it loads kernels, batch-norm
// coefficients, residual partial sums and, for every timestep, a fresh random
// input spike map; starts a pass; polls for completion; and reads back the
// output spikes, which are compared neuron by neuron with a reference model
// of the layer kept here (convolution with zero padding, residual addition,
// y*G + H in Q8.8, IF or LIF integration, threshold, reset-by-subtraction),
// carrying membrane potentials across timesteps. Each pass's cycle and stall
// counters are checked against the schedule (one accumulate cycle per
// kernel-row segment and input channel, one final cycle per tile, 12 cycles
// per tile at least while the aggregation core is busy).
//
// Layers run: 3x3 IF on 10x10 with 2 input and 3 output channels over 3
// timesteps; 5x5 LIF stride 2 with residual sums; 11x11 IF; 7x7 LIF with
// residual sums; a fully connected slice as 1x1 kernels on 64 channels; and a
// pass that fills the input buffer (32x32) and one ping-pong half (16 output
// channels). Two layers are chained: they take the previous layer's output
// spikes of the same timestep straight from the output buffer (the layer
// input select copies them), and the reference model feeds them the
// previous layer's reference outputs. Each timestep writes its outputs to
// its own region of the output buffer. The mechanisms exercised are counted
// and each must occur.
module tb_sia_top import sia_pkg::*;;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [HADDR_W-1:0] s_awaddr, s_araddr;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready, done;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0] s_wstrb;
  logic [1:0] s_bresp, s_rresp;
  int checks = 0, failures = 0;

  sia_top dut (.*);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- AXI4-Lite master ----------------
  task automatic axi_write(logic [HADDR_W-1:0] a, logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    s_awaddr = a; s_awvalid = 1; s_wdata = d; s_wstrb = 4'hf; s_wvalid = 1; s_bready = 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(negedge clk);
    resp = s_bresp;
    @(negedge clk);
    s_bready = 0;
  endtask

  task automatic wr(logic [HADDR_W-1:0] a, logic [31:0] d);
    logic [1:0] resp;
    axi_write(a, d, resp);
    if (resp != 2'b00) begin failures++; $display("write %h: response %0d", a, resp); end
  endtask

  task automatic rd(logic [HADDR_W-1:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1; s_rready = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk);
    s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    if (s_rresp != 2'b00) begin failures++; $display("read %h: response %0d", a, s_rresp); end
    @(negedge clk);
    s_rready = 0;
  endtask

  // ---------------- reference model ----------------
  int iw, ih, k, s2, nic, noc, lif, leak, vth, res_en, out_base, res_base;
  int oh, ow, nty, ntx;
  logic signed [7:0]  kern [64][11][11];          // [slot][row][col]
  logic signed [15:0] g_tab [64], h_tab [64];
  logic signed [15:0] resid [64][32][32];         // [o][y][x]
  int                 u_ref [64][32][32];
  bit                 spk_in [1024];
  // outputs of the current and the previous layer, per timestep, in the input layout
  bit                 cur_out [8][1024], prev_out [8][1024];
  int                 out_tab [8], src_tab [8];
  int                 chain_on, p_oh, p_ow, p_noc;

  // mechanism counters
  int n_if, n_lif, n_res, n_stride2, n_multiseg, n_stall_pass, n_spikes, n_soft_reset,
      n_partial_tile, n_pp_toggle, n_fc, n_err_resp, n_quiet, n_chain;

  function automatic int sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int tile_of(int o, int y, int x);
    return (o * nty + y / 8) * ntx + x / 8;
  endfunction

  task automatic setup(int w_, int h_, int k_, int s2_, int nic_, int noc_, int lif_, int leak_,
                       int vth_, int res_);
    logic [31:0] d;
    iw = w_; ih = h_; k = k_; s2 = s2_; nic = nic_; noc = noc_; lif = lif_; leak = leak_;
    vth = vth_; res_en = res_;
    out_base = 8 * $urandom_range(0, 100);
    res_base = 8 * $urandom_range(0, 100);
    oh = s2 ? (ih + 1) / 2 : ih; ow = s2 ? (iw + 1) / 2 : iw;
    nty = (oh + 7) / 8; ntx = (ow + 7) / 8;
    wr(A_SHAPE, 32'(iw) | (32'(ih) << 8) | (32'(k) << 16) | (32'(s2) << 20));
    wr(A_CHANS, 32'(nic) | (32'(noc) << 16));
    wr(A_OUTBASE, 32'(out_base));
    wr(A_RESBASE, 32'(res_base));
    // kernels: slot o*nic + i, row-major, K*K bytes from the slot start
    for (int sl = 0; sl < nic * noc; sl++) begin
      for (int a = 0; a < k; a++)
        for (int b = 0; b < k; b++) kern[sl][a][b] = 8'($urandom_range(0, 80) - 40);
      for (int wd = 0; wd < (k * k + 3) / 4; wd++) begin
        d = 0;
        for (int b = 0; b < 4; b++) begin
          automatic int idx = wd * 4 + b;
          if (idx < k * k) d[8*b +: 8] = kern[sl][idx / k][idx % k];
        end
        wr(A_WEIGHT + 18'(sl * 128 + wd * 4), d);
      end
    end
    for (int o = 0; o < noc; o++) begin
      g_tab[o] = 16'($urandom_range(128, 400));      // 0.5 .. 1.56
      h_tab[o] = 16'($urandom_range(0, 120) - 60);
      wr(A_BN + 18'(4 * o), {g_tab[o], h_tab[o]});
    end
    if (res_en) begin
      for (int o = 0; o < noc; o++)
        for (int y = 0; y < nty * 8; y++)
          for (int x = 0; x < ntx * 8; x++)
            resid[o][y][x] = (y < oh && x < ow) ? 16'($urandom_range(0, 200) - 100) : 16'sd0;
      // word tile*8 + row holds the 8 neurons of that PE row, two per 32-bit write
      for (int o = 0; o < noc; o++)
        for (int ty = 0; ty < nty; ty++)
          for (int tx = 0; tx < ntx; tx++)
            for (int r = 0; r < 8; r++)
              for (int q = 0; q < 4; q++) begin
                automatic int word = res_base + tile_of(o, ty * 8, tx * 8) * 8 + r;
                wr(A_RESID + 18'(word * 16 + q * 4),
                   {resid[o][ty*8+r][tx*8+2*q+1], resid[o][ty*8+r][tx*8+2*q]});
              end
    end
    if (lif) n_lif++; else n_if++;
    if (res_en) n_res++;
    if (s2) n_stride2++;
    if (k > 3) n_multiseg++;
    if (oh % 8 != 0 || ow % 8 != 0) n_partial_tile++;
    if (ih == 1 && iw == 1 && k == 1) n_fc++;
  endtask

  task automatic timestep(int t, int density);
    logic [31:0] d, st0, st1, cyc, stl;
    int acc, tiles, exp_stall, copy_cyc;
    tiles = noc * nty * ntx;
    if (chain_on) begin
      // input = previous layer's output of this timestep, copied inside the accelerator
      for (int i = 0; i < 1024; i++) spk_in[i] = (i < nic * ih * iw) && prev_out[t][i];
      wr(A_SRCBASE, 32'(src_tab[t]));
      copy_cyc = nic * ((ih + 7) / 8) * ((iw + 7) / 8) * 8 + 1;
    end else begin
      // fresh input spikes from the processor
      for (int i = 0; i < 1024; i++) spk_in[i] = (i < nic * ih * iw) && ($urandom_range(0, 99) < density);
      for (int wd = 0; wd < 32; wd++) begin
        d = 0;
        for (int b = 0; b < 32; b++) d[b] = spk_in[wd * 32 + b];
        wr(A_INSPK + 18'(wd * 4), d);
      end
      copy_cyc = 0;
    end
    // each timestep's output goes to its own region
    out_tab[t] = out_base + t * tiles * 8;
    wr(A_OUTBASE, 32'(out_tab[t]));
    wr(A_NEURON, 32'(vth & 16'hffff) | (32'(leak) << 16) | (32'(lif) << 24) |
                 (32'(t == 0) << 25) | (32'(res_en) << 26) | (32'(chain_on) << 27));
    rd(A_STATUS, st0);
    wr(A_CTRL, 32'h1);
    do rd(A_STATUS, st1); while (!st1[1]);
    if (st1[2] != st0[2]) n_pp_toggle++;
    checks++;
    if (st1[2] == st0[2]) begin failures++; $display("ping-pong select did not toggle"); end
    // schedule
    acc = nic * k * ((k + 2) / 3);
    exp_stall = (tiles - 1) * ((11 - acc) > 0 ? (11 - acc) : 0);
    rd(A_CYCLES, cyc);
    rd(A_STALLS, stl);
    checks++;
    if (int'(stl) != exp_stall || int'(cyc) != copy_cyc + tiles * (acc + 1) + exp_stall + 12) begin
      failures++;
      $display("cycles %0d stalls %0d, expected %0d and %0d", cyc, stl, copy_cyc + tiles * (acc + 1) + exp_stall + 12, exp_stall);
    end
    if (stl != 0) n_stall_pass++;
    // reference update and comparison
    for (int o = 0; o < noc; o++)
      for (int ty = 0; ty < nty; ty++)
        for (int tx = 0; tx < ntx; tx++)
          for (int r = 0; r < 8; r++) begin
            automatic int addr = out_tab[t] + tile_of(o, ty * 8, tx * 8) * 8 + r;
            automatic logic [7:0] got, e;
            rd(A_OUTPUT + 18'(addr & ~3), d);
            got = d[8 * (addr % 4) +: 8];
            e = '0;
            for (int c = 0; c < 8; c++) begin
              automatic int y = ty * 8 + r, x = tx * 8 + c, pad = (k - 1) / 2, st = s2 ? 2 : 1;
              automatic int ps = 0, yy, bn, up, ub, um;
              if (y >= oh || x >= ow) continue;
              if (o * oh * ow < 1024) cur_out[t][o * oh * ow + y * ow + x] = 0;
              for (int i = 0; i < nic; i++)
                for (int a = 0; a < k; a++)
                  for (int b = 0; b < k; b++) begin
                    automatic int iy = y * st + a - pad, ix = x * st + b - pad;
                    if (iy >= 0 && iy < ih && ix >= 0 && ix < iw && spk_in[i * ih * iw + iy * iw + ix])
                      ps += kern[o * nic + i][a][b];
                  end
              yy = sat(longint'(ps) + (res_en ? longint'(resid[o][y][x]) : 0));
              bn = sat(((longint'(yy) * longint'(g_tab[o])) >>> 8) + longint'(h_tab[o]));
              up = (t == 0) ? 0 : u_ref[o][y][x];
              ub = lif ? sat(longint'(up) - longint'(up >>> leak)) : up;
              um = sat(longint'(ub) + longint'(bn));
              if (um >= vth) begin
                e[c] = 1;
                if (o * oh * ow + y * ow + x < 1024) cur_out[t][o * oh * ow + y * ow + x] = 1;
                u_ref[o][y][x] = sat(longint'(um) - longint'(vth));
                n_spikes++;
                if (u_ref[o][y][x] != 0) n_soft_reset++;
              end else begin
                u_ref[o][y][x] = um;
                n_quiet++;
              end
            end
            checks++;
            if (got !== e) begin
              failures++;
              if (failures < 20)
                $display("t%0d ch %0d tile (%0d,%0d) row %0d: spikes %b expected %b", t, o, ty, tx, r, got, e);
            end
          end
  endtask

  task automatic layer(int w_, int h_, int k_, int s2_, int nic_, int noc_, int lif_, int leak_,
                       int vth_, int res_, int steps, int density);
    // keep the previous layer's outputs for a chained layer
    prev_out = cur_out;
    src_tab = out_tab;
    p_oh = oh; p_ow = ow; p_noc = noc;
    chain_on = 0;
    setup(w_, h_, k_, s2_, nic_, noc_, lif_, leak_, vth_, res_);
    for (int t = 0; t < steps; t++) timestep(t, density);
    $display("layer %0dx%0d k%0d s%0d ic%0d oc%0d %s res%0d T%0d done", w_, h_, k_, s2_ + 1, nic_, noc_,
             lif_ ? "LIF" : "IF", res_, steps);
  endtask

  // a layer whose input is the previous layer's output (same timesteps)
  task automatic chained_layer(int k_, int s2_, int noc_, int lif_, int leak_, int vth_, int steps);
    prev_out = cur_out;
    src_tab = out_tab;
    p_oh = oh; p_ow = ow; p_noc = noc;
    setup(p_ow, p_oh, k_, s2_, p_noc, noc_, lif_, leak_, vth_, 0);
    chain_on = 1;
    n_chain++;
    for (int t = 0; t < steps; t++) timestep(t, 0);
    chain_on = 0;
    $display("chained layer %0dx%0d k%0d s%0d ic%0d oc%0d %s T%0d done", p_ow, p_oh, k_, s2_ + 1, p_noc, noc_,
             lif_ ? "LIF" : "IF", steps);
  endtask

  initial begin
    logic [1:0] resp;
    logic [31:0] d;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wr(A_CTRL, 32'h2);                                   // start from U1
    chain_on = 0;
    layer(10, 10, 3, 0, 2, 3, 0, 0, 60, 0, 3, 30);
    chained_layer(3, 1, 2, 1, 2, 40, 3);                 // 3 x 10x10 -> stride 2, LIF
    layer(12, 12, 5, 1, 1, 2, 1, 2, 50, 1, 2, 30);
    chained_layer(5, 0, 3, 0, 0, 60, 2);                 // 2 x 6x6 -> 5x5 kernels
    layer(9, 9, 11, 0, 1, 1, 0, 0, 100, 0, 2, 25);
    layer(8, 8, 7, 0, 2, 2, 1, 3, 80, 1, 2, 20);
    layer(1, 1, 1, 0, 64, 1, 0, 0, 40, 0, 3, 40);        // fully connected 64 -> 1
    layer(32, 32, 3, 0, 1, 16, 0, 0, 40, 0, 2, 25);      // full input buffer and ping-pong half
    // protocol errors: writing the read-only output window, an unmapped read
    axi_write(A_OUTPUT, 32'h0, resp);
    if (resp == 2'b10) n_err_resp++;
    checks++;
    if (resp != 2'b10) begin failures++; $display("no error response for a write to the output window"); end
    // mechanism coverage
    $display("IF %0d LIF %0d residual %0d stride2 %0d multi-segment %0d stalled passes %0d spikes %0d (soft reset %0d, quiet %0d) partial tiles %0d ping-pong toggles %0d fc %0d chained %0d",
             n_if, n_lif, n_res, n_stride2, n_multiseg, n_stall_pass, n_spikes, n_soft_reset, n_quiet,
             n_partial_tile, n_pp_toggle, n_fc, n_chain);
    begin
      automatic int cov[14] = '{n_if, n_lif, n_res, n_stride2, n_multiseg, n_stall_pass, n_spikes, n_soft_reset,
                      n_quiet, n_partial_tile, n_pp_toggle, n_fc, n_err_resp, n_chain};
      foreach (cov[i]) begin
        checks++;
        if (cov[i] == 0) begin failures++; $display("mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
