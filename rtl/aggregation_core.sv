// aggregation_core: batch normalisation and spiking activation of a tile.
//
// When the spiking core finishes a tile it hands over the 64 partial sums;
// this core processes them one PE row (eight neurons) per cycle through
// eight lanes. Per lane: the residual partial sum supplied by the processor
// is added when res_en is set, the sum is batch-normalised (y*G + H with the
// G/H of the tile's output channel), added to the previous membrane potential
// read from the ping-pong store (zero in the first timestep) and compared
// with the threshold; the new potential is written to the other half of the
// store and the eight spikes to the output buffer as one byte. Neurons of a
// tile that lie outside the output map never spike. The sequence of
// operations (residual add, batch norm, activation with reset-by-subtraction,
// IF/LIF mode) follows the paper; eight lanes, the row-per-cycle schedule and
// the memory addressing (one word per PE row, word = tile*8 + row, offset by
// the residual and output bases) are this design's choices.
//
// Timing: 'load' is accepted when 'ready' is high. Reads for row r are issued
// r+1 cycles after the load, and its results written one cycle later, so a
// tile occupies the core for 9 cycles; 'ready' returns on the 10th.
module aggregation_core import sia_pkg::*; #(
  parameter int unsigned ROWS    = 8,
  parameter int unsigned COLS    = 8,
  parameter int unsigned MP_AW   = 11,   // ping-pong half, 128-bit words
  parameter int unsigned RES_AW  = 13,   // residual memory, 128-bit words
  parameter int unsigned OUT_AW  = 16    // output memory, bytes
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // tile hand-over
  input  logic                        load,
  output logic                        ready,
  input  logic [ROWS*COLS-1:0][15:0]  psum,
  input  logic [5:0]                  ch,       // output channel of the tile
  input  logic [MP_AW-1:0]            mword,    // first word of the tile
  input  logic [ROWS*COLS-1:0]        mask,     // neuron inside the output map
  // layer configuration
  input  layer_cfg_t                  cfg,
  // batch-norm coefficients of channel bn_ch
  output logic [5:0]                  bn_ch,
  input  logic signed [15:0]          bn_g,
  input  logic signed [15:0]          bn_h,
  // membrane ping-pong store
  output logic                        mp_rd_en,
  output logic [MP_AW-1:0]            mp_rd_addr,
  input  logic [COLS*16-1:0]          mp_rd_data,
  output logic                        mp_wr_en,
  output logic [MP_AW-1:0]            mp_wr_addr,
  output logic [COLS*16-1:0]          mp_wr_data,
  // residual partial sums
  output logic                        res_rd_en,
  output logic [RES_AW-1:0]           res_rd_addr,
  input  logic [COLS*16-1:0]          res_rd_data,
  // output spikes
  output logic                        out_wr_en,
  output logic [OUT_AW-1:0]           out_wr_addr,
  output logic [COLS-1:0]             out_wr_data
);
  logic [ROWS*COLS-1:0][15:0] ps_q;
  logic [ROWS*COLS-1:0]       mask_q;
  logic [5:0]                 ch_q;
  logic [MP_AW-1:0]           mword_q;
  logic                       busy;
  logic [$clog2(ROWS+1)-1:0]  rd_row;
  logic                       cmp_v;
  logic [$clog2(ROWS)-1:0]    cmp_row;

  assign ready = !busy;
  assign bn_ch = ch_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ps_q    <= '0;
      mask_q  <= '0;
      ch_q    <= '0;
      mword_q <= '0;
      busy    <= 1'b0;
      rd_row  <= '0;
      cmp_v   <= 1'b0;
      cmp_row <= '0;
    end else begin
      cmp_v <= 1'b0;
      if (load && !busy) begin
        ps_q    <= psum;
        mask_q  <= mask;
        ch_q    <= ch;
        mword_q <= mword;
        busy    <= 1'b1;
        rd_row  <= '0;
      end else if (busy) begin
        if (rd_row < ($clog2(ROWS+1))'(ROWS)) begin
          cmp_v   <= 1'b1;
          cmp_row <= rd_row[$clog2(ROWS)-1:0];
          rd_row  <= rd_row + 1'b1;
        end
        if (cmp_v && cmp_row == ($clog2(ROWS))'(ROWS-1)) busy <= 1'b0;
      end
    end
  end

  // read issue
  always_comb begin
    mp_rd_en    = busy && (rd_row < ($clog2(ROWS+1))'(ROWS));
    res_rd_en   = mp_rd_en && cfg.res_en;
    mp_rd_addr  = mword_q + MP_AW'(rd_row);
    res_rd_addr = RES_AW'(cfg.res_base) + RES_AW'(mword_q) + RES_AW'(rd_row);
  end

  // eight lanes of batch norm and activation
  logic signed [COLS-1:0][15:0] y, ybn, u_prev, u_next;
  logic [COLS-1:0]              spk;
  for (genvar c = 0; c < COLS; c++) begin : g_lane
    always_comb begin
      logic signed [15:0] p, rs;
      p      = signed'(ps_q[int'(cmp_row)*COLS + c]);
      rs     = cfg.res_en ? signed'(res_rd_data[16*c +: 16]) : 16'sd0;
      y[c]   = sat16(34'(p) + 34'(rs));
      u_prev[c] = cfg.first_ts ? 16'sd0 : signed'(mp_rd_data[16*c +: 16]);
    end
    batchnorm_unit #(.FRAC(BN_FRAC)) u_bn (.y(y[c]), .g(bn_g), .h(bn_h), .ybn(ybn[c]));
    activation_unit u_act (
      .x(ybn[c]), .u_prev(u_prev[c]), .vth(cfg.vth), .lif(cfg.lif), .leak(cfg.leak),
      .spike(spk[c]), .u_next(u_next[c])
    );
  end

  always_comb begin
    mp_wr_en    = cmp_v;
    mp_wr_addr  = mword_q + MP_AW'(cmp_row);
    out_wr_en   = cmp_v;
    out_wr_addr = OUT_AW'(cfg.out_base) + OUT_AW'(mword_q) + OUT_AW'(cmp_row);
    for (int c = 0; c < COLS; c++) begin
      mp_wr_data[16*c +: 16] = u_next[c];
      out_wr_data[c]         = spk[c] && mask_q[int'(cmp_row)*COLS + c];
    end
  end

  // the controller never hands over a tile while one is in progress
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) load |-> !busy)
    else $error("aggregation_core: tile handed over while busy");
endmodule
