// tb_aggregation_core: hands random tiles of partial sums to the core with
// behavioural one-cycle-read models of the ping-pong store and the residual
// memory, in IF and LIF mode, with and without residual sums and in first
// and later timesteps, and checks every membrane word and output byte
// written (address and value) against a reference computed here. Also
// checks that a tile keeps the core busy for 9 cycles, ready again on the
// 10th, and that masked neurons never spike.
module tb_aggregation_core import sia_pkg::*;;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load, ready;
  logic [63:0][15:0] psum;
  logic [5:0] ch, bn_ch;
  logic [10:0] mword;
  logic [63:0] mask;
  layer_cfg_t cfg;
  logic signed [15:0] bn_g, bn_h;
  logic mp_rd_en, mp_wr_en, res_rd_en, out_wr_en;
  logic [10:0] mp_rd_addr, mp_wr_addr;
  logic [12:0] res_rd_addr;
  logic [15:0] out_wr_addr;
  logic [127:0] mp_rd_data, mp_wr_data, res_rd_data;
  logic [7:0] out_wr_data;

  logic [127:0] mp_mem [2048];
  logic [127:0] res_mem [8192];
  logic signed [15:0] g_tab [64], h_tab [64];
  int checks = 0, failures = 0, n_spk = 0, n_masked = 0;

  aggregation_core dut (.*);

  assign bn_g = g_tab[bn_ch];
  assign bn_h = h_tab[bn_ch];
  always_ff @(posedge clk) begin
    if (mp_rd_en)  mp_rd_data  <= mp_mem[mp_rd_addr];
    if (res_rd_en) res_rd_data <= res_mem[res_rd_addr];
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // expected writes of the tile being processed
  logic [127:0] exp_mp [8];
  logic [7:0]   exp_out [8];
  int           got_rows;

  always @(posedge clk) if (rst_n) begin
    if (mp_wr_en !== out_wr_en) begin failures++; $display("write enables disagree"); end
    if (mp_wr_en) begin
      automatic int r = int'(mp_wr_addr) - int'(mword);
      checks++;
      if (r < 0 || r > 7 || mp_wr_data !== exp_mp[r]) begin
        failures++; $display("membrane write row %0d: %h vs %h", r, mp_wr_data, exp_mp[r & 7]);
      end
      checks++;
      if (out_wr_addr !== 16'(int'(cfg.out_base) + int'(mword) + r) || out_wr_data !== exp_out[r & 7]) begin
        failures++; $display("output write row %0d at %0d: %b vs %b", r, out_wr_addr, out_wr_data, exp_out[r & 7]);
      end
      got_rows++;
    end
  end

  task automatic one_tile(bit lif, bit first, bit res);
    int lat;
    cfg.lif = lif; cfg.first_ts = first; cfg.res_en = res;
    cfg.leak = 4'($urandom_range(1, 6));
    cfg.vth = 16'($urandom_range(20, 400));
    cfg.out_base = 16'($urandom_range(0, 4000));
    cfg.res_base = 13'($urandom_range(0, 4000));
    for (int i = 0; i < 64; i++) psum[i] = 16'($urandom_range(0, 600) - 300);
    mask = {$urandom, $urandom};
    ch = 6'($urandom);
    mword = 11'(8 * $urandom_range(0, 255));
    for (int r = 0; r < 8; r++) begin
      mp_mem[mword + r]  = '0;
      res_mem[cfg.res_base + mword + r] = '0;
      for (int c = 0; c < 8; c++) begin
        mp_mem[mword + r][16*c +: 16] = 16'($urandom_range(0, 800) - 300);
        res_mem[cfg.res_base + mword + r][16*c +: 16] = 16'($urandom_range(0, 200) - 100);
      end
    end
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < 8; c++) begin
        automatic int y, bn, up, ub, um, un;
        automatic bit sp;
        y  = sat(longint'(signed'(psum[r*8+c])) +
                 (res ? longint'(signed'(res_mem[cfg.res_base + mword + r][16*c +: 16])) : 0));
        bn = sat(((longint'(y) * longint'(g_tab[ch])) >>> 8) + longint'(h_tab[ch]));
        up = first ? 0 : int'(signed'(mp_mem[mword + r][16*c +: 16]));
        ub = lif ? sat(up - (up >>> cfg.leak)) : up;
        um = sat(ub + bn);
        sp = um >= int'(cfg.vth);
        un = sp ? sat(um - int'(cfg.vth)) : um;
        exp_mp[r][16*c +: 16] = 16'(un);
        exp_out[r][c] = sp && mask[r*8+c];
        if (sp && mask[r*8+c]) n_spk++;
        if (sp && !mask[r*8+c]) n_masked++;
      end
    got_rows = 0;
    @(negedge clk);
    checks++;
    if (!ready) begin failures++; $display("not ready before load"); end
    load = 1;
    @(negedge clk);
    load = 0;
    lat = 1;
    while (!ready) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 10) begin failures++; $display("ready after %0d cycles, expected 10", lat); end
    checks++;
    if (got_rows != 8) begin failures++; $display("%0d rows written", got_rows); end
  endtask

  initial begin
    load = 0; cfg = '0; psum = '0; mask = '0; ch = 0; mword = 0;
    for (int i = 0; i < 64; i++) begin
      g_tab[i] = 16'($urandom_range(64, 512));
      h_tab[i] = 16'($urandom_range(0, 100) - 50);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 80; n++) one_tile(n[0], n[1], n[2]);
    checks++;
    if (n_spk == 0 || n_masked == 0) begin failures++; $display("no spikes (%0d) or no masked spikes (%0d)", n_spk, n_masked); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
