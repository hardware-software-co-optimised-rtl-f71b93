// tb_sia_controller: runs layer passes with a cycle model of the spiking
// core (psum_valid two cycles after a final command) and of the aggregation
// core (busy 9 cycles per tile) around the controller. For each pass it
// checks the whole command stream against the loop nest worked out here:
// kernel slot, channel offset, kernel row and column, tile origin, 'clr' on
// the first accumulate cycle of a tile, the tile hand-over (channel, memory
// word, validity mask), the number of tiles, the cycle count, the stall
// counter, 'done' and the ping-pong toggle. Chained passes add a model of
// the layer input select (done a random number of cycles after go): no
// command may be issued before it is done, and the pass grows by exactly
// that many cycles.
module tb_sia_controller import sia_pkg::*;;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  layer_cfg_t cfg;
  logic start, pp_clear, busy, done, pp_sel;
  logic [31:0] cycles, stalls;
  logic sc_acc, sc_clr, sc_fin;
  logic [9:0] sc_ch_base;
  logic [5:0] sc_oy0, sc_ox0, w_slot, tile_ch;
  logic [3:0] sc_kr, sc_kc;
  logic psum_valid, agg_ready;
  logic [10:0] tile_mword;
  logic [63:0] tile_mask;
  logic ls_go, ls_done;
  int checks = 0, failures = 0;

  sia_controller dut (.*);

  // cycle model of the layer input select: done ls_lat cycles after go
  int ls_cnt, ls_lat, ls_gos;
  logic ls_active;
  assign ls_done = (ls_cnt == 1);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin ls_cnt <= 0; ls_gos <= 0; end
    else begin
      if (ls_go) begin ls_cnt <= ls_lat; ls_gos <= ls_gos + 1; end
      else if (ls_cnt != 0) ls_cnt <= ls_cnt - 1;
    end
  end
  assign ls_active = (ls_cnt != 0);
  always @(posedge clk) if (rst_n && ls_active && (sc_acc || sc_fin)) begin
    failures++; $display("command issued while the input copy runs");
  end

  // cycle model of the spiking core and the aggregation core
  logic [1:0] fin_d;
  int agg_cnt;
  assign psum_valid = fin_d[1];
  assign agg_ready  = (agg_cnt == 0);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin fin_d <= '0; agg_cnt <= 0; end
    else begin
      fin_d <= {fin_d[0], sc_fin};
      if (psum_valid && agg_cnt == 0) agg_cnt <= 9;
      else if (agg_cnt != 0) agg_cnt <= agg_cnt - 1;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected command stream
  typedef struct { bit fin; bit clr; int slot, chb, kr, kc, oy0, ox0; } cmd_t;
  cmd_t exp_q[$];
  int exp_tiles, tile_seen, acc_per_tile, stall_seen;

  task automatic build(int iw, int ih, int k, bit s2, int nic, int noc);
    int oh = s2 ? (ih + 1) / 2 : ih, ow = s2 ? (iw + 1) / 2 : iw;
    int nty = (oh + 7) / 8, ntx = (ow + 7) / 8, nseg = (k + 2) / 3;
    exp_q.delete();
    exp_tiles = noc * nty * ntx;
    acc_per_tile = nic * k * nseg;
    for (int o = 0; o < noc; o++)
      for (int ty = 0; ty < nty; ty++)
        for (int tx = 0; tx < ntx; tx++) begin
          for (int i = 0; i < nic; i++)
            for (int r = 0; r < k; r++)
              for (int j = 0; j < nseg; j++)
                exp_q.push_back('{0, (i == 0 && r == 0 && j == 0), o * nic + i, i * ih * iw, r, 3 * j, ty * 8, tx * 8});
          exp_q.push_back('{1, 0, 0, 0, 0, 0, ty * 8, tx * 8});
        end
  endtask

  // compare every issued command with the expected stream
  int last_fin_t, fin_gap_bad;
  always @(posedge clk) if (rst_n && (sc_acc || sc_fin)) begin
    automatic cmd_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("command beyond the expected stream"); end
    else begin
      e = exp_q.pop_front();
      if (sc_fin != e.fin || sc_acc == e.fin || sc_oy0 != 6'(e.oy0) || sc_ox0 != 6'(e.ox0) ||
          (!e.fin && (sc_clr != e.clr || w_slot != 6'(e.slot) || sc_ch_base != 10'(e.chb) ||
                      sc_kr != 4'(e.kr) || sc_kc != 4'(e.kc)))) begin
        failures++;
        $display("cmd mismatch: fin %0d clr %0d slot %0d chb %0d kr %0d kc %0d oy %0d ox %0d; expected fin %0d clr %0d slot %0d chb %0d kr %0d kc %0d oy %0d ox %0d",
                 sc_fin, sc_clr, w_slot, sc_ch_base, sc_kr, sc_kc, sc_oy0, sc_ox0,
                 e.fin, e.clr, e.slot, e.chb, e.kr, e.kc, e.oy0, e.ox0);
      end
    end
    if (sc_fin && !agg_ready) begin failures++; $display("final cycle while aggregation busy"); end
  end

  // hand-over fields at the time the aggregation core would load
  int exp_oh, exp_ow, exp_ntx, exp_nty;
  always @(posedge clk) if (rst_n && psum_valid) begin
    automatic int n = tile_seen, tiles_per_ch = exp_ntx * exp_nty;
    automatic int o = n / tiles_per_ch, tl = n % tiles_per_ch;
    automatic int ty = tl / exp_ntx, tx = tl % exp_ntx;
    automatic logic [63:0] m;
    for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++)
      m[r*8+c] = (ty * 8 + r < exp_oh) && (tx * 8 + c < exp_ow);
    checks++;
    if (tile_ch != 6'(o) || tile_mword != 11'(8 * n) || tile_mask != m) begin
      failures++; $display("tile %0d hand-over: ch %0d word %0d mask %h", n, tile_ch, tile_mword, tile_mask);
    end
    tile_seen++;
  end

  task automatic pass(int iw, int ih, int k, bit s2, int nic, int noc, bit expect_stall,
                      bit chain = 0);
    logic pp0;
    int t0, t_end, gos0;
    cfg = '0;
    cfg.chain = chain;
    ls_lat = $urandom_range(1, 40);
    gos0 = ls_gos;
    cfg.in_w = 6'(iw); cfg.in_h = 6'(ih); cfg.ksize = 4'(k); cfg.stride2 = s2;
    cfg.in_ch = 7'(nic); cfg.out_ch = 7'(noc);
    exp_oh = s2 ? (ih + 1) / 2 : ih; exp_ow = s2 ? (iw + 1) / 2 : iw;
    exp_nty = (exp_oh + 7) / 8; exp_ntx = (exp_ow + 7) / 8;
    build(iw, ih, k, s2, nic, noc);
    tile_seen = 0;
    pp0 = pp_sel;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    t0 = $time;
    while (!done) @(negedge clk);
    t_end = $time;
    checks++;
    if (exp_q.size() != 0 || tile_seen != exp_tiles) begin
      failures++; $display("pass ended with %0d commands left, %0d of %0d tiles", exp_q.size(), tile_seen, exp_tiles);
    end
    checks++;
    if (pp_sel == pp0) begin failures++; $display("ping-pong select did not toggle"); end
    checks++;
    if (expect_stall ? (stalls == 0) : (stalls != 0)) begin
      failures++; $display("stall count %0d (stall expected: %0d)", stalls, expect_stall);
    end
    // without stalls every tile takes exactly its accumulate cycles plus one final cycle;
    // the end adds the hand-over (2) and the last aggregation (9) and one cycle to finish
    if (!expect_stall) begin
      checks++;
      if (cycles != 32'(exp_tiles * (acc_per_tile + 1) + 2 + 9 + 1 + (chain ? ls_lat : 0))) begin
        failures++; $display("cycles %0d, expected %0d", cycles, exp_tiles * (acc_per_tile + 1) + 12 + (chain ? ls_lat : 0));
      end
    end
    checks++;
    if (ls_gos - gos0 != int'(chain)) begin failures++; $display("%0d input copies for chain=%0d", ls_gos - gos0, chain); end
    stall_seen += stalls;
  endtask

  initial begin
    cfg = '0; start = 0; pp_clear = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    pass(10, 10, 3, 0, 2, 3, 1);    // 2*3*1 + 1 = 7 cycles per tile < 11: stalls
    pass(10, 10, 3, 0, 4, 3, 0);    // 4*3*1 + 1 = 13 cycles per tile: no stall
    pass(8, 8, 3, 0, 1, 4, 1);      // 3 + 1 cycles per tile: stalls
    pass(12, 12, 5, 1, 1, 2, 1);
    pass(20, 20, 11, 0, 2, 2, 0);   // 88 acc cycles per tile: no stall
    pass(32, 32, 3, 0, 1, 16, 1);   // a full input and membrane buffer
    pass(9, 9, 7, 0, 2, 1, 0);
    pass(10, 10, 3, 0, 4, 3, 0, 1); // chained: input copy first
    pass(8, 8, 3, 0, 1, 4, 1, 1);
    pass(20, 20, 11, 0, 2, 2, 0, 1);
    @(negedge clk); pp_clear = 1; @(negedge clk); pp_clear = 0;
    checks++;
    if (pp_sel != 0) begin failures++; $display("pp_clear ignored"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
