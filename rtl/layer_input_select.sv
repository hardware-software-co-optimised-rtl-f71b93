// layer_input_select: loads the previous layer's output spikes as the input
// of the next layer.
//
// The first layer of a network gets its input spikes from the processor,
// written into the input scratchpad over the host port. Every later layer can
// instead take the spikes a previous pass left in the output buffer: before
// the pass starts, this unit copies them into the input scratchpad and
// reorders them from the output layout (one byte per PE row of a tile,
// tiles in the order output channel, tile row, tile column) into the input
// layout (bit ch*H*W + y*W + x). The source is the output buffer region that
// starts at byte src_base; its shape is the current layer's input shape
// (in_ch channels of in_h x in_w), since the previous layer's output channels
// and map are this layer's input. Choosing between processor data and the
// previous layer's output follows the published implementation flow, which
// selects "first layer data" or "consecutive layer's data" inside the
// programmable logic; the copy engine, its order and its timing are this
// design's choices.
//
// Timing: 'go' is a one-cycle pulse. One output byte is read per cycle,
// in_ch * ceil(in_h/8) * ceil(in_w/8) * 8 reads in all, starting the cycle
// after 'go'; each byte is written to the input scratchpad one cycle after
// its read (up to eight bits, those inside the map). 'done' pulses in the
// cycle of the last write, so the scratchpad holds the new input in the
// cycle after 'done'. 'busy' is high from the cycle after 'go' up to and
// including the 'done' cycle. ld_val is the byte just read, passed through
// unchanged; ld_we and ld_idx say where its bits go.
module layer_input_select import sia_pkg::*; #(
  parameter int unsigned IN_BITS = 1024,
  parameter int unsigned OUT_AW  = 16
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              go,
  input  layer_cfg_t                        cfg,
  output logic                              busy,
  output logic                              done,
  // output buffer read port (one-cycle latency)
  output logic                              rd_en,
  output logic [OUT_AW-1:0]                 rd_addr,
  input  logic [7:0]                        rd_data,
  // bit writes into the input scratchpad
  output logic [7:0]                        ld_we,
  output logic [7:0][$clog2(IN_BITS)-1:0]   ld_idx,
  output logic [7:0]                        ld_val
);
  localparam int unsigned IW = $clog2(IN_BITS);

  logic       issuing;
  logic [5:0] ch;
  logic [2:0] ty, tx, r;
  logic [OUT_AW-1:0] addr;
  logic [IW:0] ch_base;

  // stage holding the position of the byte being read
  logic        p_v, p_last;
  logic [5:0]  p_y, p_x0;
  logic [IW:0] p_base;

  logic [2:0]  nty, ntx;
  logic [10:0] plane;
  always_comb begin
    nty   = 3'((7'(cfg.in_h) + 7'd7) >> 3);
    ntx   = 3'((7'(cfg.in_w) + 7'd7) >> 3);
    plane = 11'(cfg.in_h) * 11'(cfg.in_w);
  end

  wire last_r  = (r == 3'd7);
  wire last_tx = (tx == ntx - 3'd1);
  wire last_ty = (ty == nty - 3'd1);
  wire last_ch = (7'(ch) == cfg.in_ch - 7'd1);
  wire last    = last_r && last_tx && last_ty && last_ch;

  assign rd_en   = issuing;
  assign rd_addr = addr;
  assign busy    = issuing || p_v;
  assign done    = p_v && p_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      ch <= '0; ty <= '0; tx <= '0; r <= '0;
      addr <= '0; ch_base <= '0;
      p_v <= 1'b0; p_last <= 1'b0;
      p_y <= '0; p_x0 <= '0; p_base <= '0;
    end else begin
      p_v    <= issuing;
      p_last <= issuing && last;
      if (issuing) begin
        p_y    <= {ty, r};
        p_x0   <= {tx, 3'b000};
        p_base <= ch_base;
        addr   <= addr + 1'b1;
        if (!last_r) r <= r + 3'd1;
        else begin
          r <= '0;
          if (!last_tx) tx <= tx + 3'd1;
          else begin
            tx <= '0;
            if (!last_ty) ty <= ty + 3'd1;
            else begin
              ty <= '0;
              ch      <= ch + 6'd1;
              ch_base <= ch_base + (IW+1)'(plane);
              if (last_ch) issuing <= 1'b0;
            end
          end
        end
      end else if (go) begin
        issuing <= 1'b1;
        ch <= '0; ty <= '0; tx <= '0; r <= '0;
        addr    <= cfg.src_base[OUT_AW-1:0];
        ch_base <= '0;
      end
    end
  end

  // write stage: scatter the eight spikes of the byte read last cycle
  logic [6:0]    x;
  logic [IW+1:0] idx;
  always_comb begin
    x   = '0;
    idx = '0;
    for (int c = 0; c < 8; c++) begin
      x   = 7'(p_x0) + 7'(c);
      idx = (IW+2)'(p_base) + (IW+2)'(p_y) * (IW+2)'(cfg.in_w) + (IW+2)'(x);
      ld_we[c]  = p_v && (p_y < cfg.in_h) && (x < 7'(cfg.in_w)) && (idx < (IW+2)'(IN_BITS));
      ld_idx[c] = idx[IW-1:0];
      ld_val[c] = rd_data[c];
    end
  end

  a_go_idle: assert property (@(posedge clk) disable iff (!rst_n) go |-> !busy)
    else $error("layer_input_select: go while busy");
endmodule
