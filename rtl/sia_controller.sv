// sia_controller: sequencer of one layer pass.
//
// A pass computes one timestep of a convolution layer slice: in_ch input
// channels (held in the input scratchpad) against out_ch output channels,
// with kernel slot o*in_ch + i holding the kernel from input channel i to
// output channel o. The loops, outermost first, are: output channel o, tile
// row ty, tile column tx (8x8 output positions per tile), input channel i,
// kernel row kr, row segment j (three weights per segment, ceil(K/3)
// segments per row). Every innermost step is one accumulate cycle of the PE
// array; after the last step of a tile one final cycle moves the sums to the
// PE output registers. A 3x3 kernel on one input channel thus takes the
// published 3 + 1 cycles. Tiles are numbered in loop order; tile n uses
// memory words 8n..8n+7 of the ping-pong store and output buffer.
//
// The aggregation core needs 9 cycles per tile. If the next tile's final
// cycle comes before the core is free again (or while a hand-over is still in
// flight), the controller stalls and counts the stall cycle. When the last
// tile has been aggregated the ping-pong select toggles, so the next pass
// (the next timestep) reads what this one wrote, and 'done' is raised.
// The published controller is only named; this loop order, the tiling and
// the stall rule are this design's choices.
//
// With the chain flag set, the pass first has the layer input select copy
// the previous layer's output into the input scratchpad and starts
// accumulating in the cycle after that copy reports done.
//
// Some command outputs have constant bits by construction: tile origins and
// tile_mword are multiples of 8.
//
// Timing: 'start' is a one-cycle pulse while idle; 'busy' is high from the
// next cycle until the pass ends; 'cycles' counts the cycles of the pass.
module sia_controller import sia_pkg::*; #(
  parameter int unsigned IN_BITS = 1024,
  parameter int unsigned MP_AW   = 11
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  layer_cfg_t                  cfg,
  input  logic                        start,
  input  logic                        pp_clear,   // force ping-pong select to U1 read
  output logic                        busy,
  output logic                        done,       // sticky until the next start
  output logic                        pp_sel,
  output logic [31:0]                 cycles,
  output logic [31:0]                 stalls,
  // spiking core command
  output logic                        sc_acc,
  output logic                        sc_clr,
  output logic                        sc_fin,
  output logic [$clog2(IN_BITS)-1:0]  sc_ch_base,
  output logic [5:0]                  sc_oy0,
  output logic [5:0]                  sc_ox0,
  output logic [3:0]                  sc_kr,
  output logic [3:0]                  sc_kc,
  output logic [5:0]                  w_slot,
  // tile hand-over to the aggregation core
  input  logic                        psum_valid,
  input  logic                        agg_ready,
  output logic [5:0]                  tile_ch,
  output logic [MP_AW-1:0]            tile_mword,
  output logic [63:0]                 tile_mask,
  // layer input select
  output logic                        ls_go,
  input  logic                        ls_done
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_ACC, S_FIN, S_DRAIN} state_e;
  state_e state;

  logic [5:0] oc, ic, ty, tx;
  logic [3:0] kr;
  logic [2:0] seg;
  logic [$clog2(IN_BITS)-1:0] ch_base;
  logic [6:0] slot_base;
  logic [MP_AW-1:0] tile_n;
  logic [1:0] inflight;       // cycles until a final cycle reaches the aggregation core

  // derived layer geometry
  logic [5:0] oh, ow;
  logic [2:0] nty, ntx, nseg;
  logic [10:0] plane;
  always_comb begin
    oh    = cfg.stride2 ? 6'((7'(cfg.in_h) + 7'd1) >> 1) : cfg.in_h;
    ow    = cfg.stride2 ? 6'((7'(cfg.in_w) + 7'd1) >> 1) : cfg.in_w;
    nty   = 3'((7'(oh) + 7'd7) >> 3);
    ntx   = 3'((7'(ow) + 7'd7) >> 3);
    nseg  = n_chunks(cfg.ksize);
    plane = 11'(cfg.in_h) * 11'(cfg.in_w);
  end

  wire last_seg = (seg == nseg - 3'd1);
  wire last_kr  = (kr == cfg.ksize - 4'd1);
  wire last_ic  = (7'(ic) == cfg.in_ch - 7'd1);
  wire last_tx  = (tx == 6'(ntx) - 6'd1);
  wire last_ty  = (ty == 6'(nty) - 6'd1);
  wire last_oc  = (7'(oc) == cfg.out_ch - 7'd1);
  wire can_fin  = agg_ready && (inflight == 2'd0);

  // command outputs
  always_comb begin
    sc_acc     = (state == S_ACC);
    sc_clr     = sc_acc && (ic == '0) && (kr == '0) && (seg == '0);
    sc_fin     = (state == S_FIN) && can_fin;
    sc_ch_base = ch_base;
    sc_oy0     = {ty[2:0], 3'b000};
    sc_ox0     = {tx[2:0], 3'b000};
    sc_kr      = kr;
    sc_kc      = 4'(seg) * 4'd3;
    w_slot     = 6'(slot_base + 7'(ic));
    ls_go      = (state == S_IDLE) && start && cfg.chain;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      busy       <= 1'b0;
      done       <= 1'b0;
      pp_sel     <= 1'b0;
      cycles     <= '0;
      stalls     <= '0;
      oc <= '0; ic <= '0; ty <= '0; tx <= '0; kr <= '0; seg <= '0;
      ch_base    <= '0;
      slot_base  <= '0;
      tile_n     <= '0;
      inflight   <= '0;
      tile_ch    <= '0;
      tile_mword <= '0;
      tile_mask  <= '0;
    end else begin
      if (inflight != 2'd0) inflight <= inflight - 2'd1;
      if (busy) cycles <= cycles + 32'd1;
      if (pp_clear && state == S_IDLE) pp_sel <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= cfg.chain ? S_LOAD : S_ACC;
          busy  <= 1'b1;
          done  <= 1'b0;
          cycles <= '0;
          stalls <= '0;
          oc <= '0; ic <= '0; ty <= '0; tx <= '0; kr <= '0; seg <= '0;
          ch_base <= '0; slot_base <= '0; tile_n <= '0;
        end
        S_LOAD: if (ls_done) state <= S_ACC;
        S_ACC: begin
          if (!last_seg) seg <= seg + 3'd1;
          else begin
            seg <= '0;
            if (!last_kr) kr <= kr + 4'd1;
            else begin
              kr <= '0;
              if (!last_ic) begin
                ic      <= ic + 6'd1;
                ch_base <= ch_base + ($clog2(IN_BITS))'(plane);
              end else begin
                ic      <= '0;
                ch_base <= '0;
                state   <= S_FIN;
              end
            end
          end
        end
        S_FIN: begin
          if (!can_fin) stalls <= stalls + 32'd1;
          else begin
            inflight   <= 2'd2;
            tile_ch    <= oc;
            tile_mword <= MP_AW'({tile_n, 3'b000});
            for (int r = 0; r < 8; r++)
              for (int c = 0; c < 8; c++)
                tile_mask[r*8+c] <= (({ty[2:0], 3'b000} + 6'(r)) < oh) &&
                                    (({tx[2:0], 3'b000} + 6'(c)) < ow);
            tile_n <= tile_n + 1'b1;
            state  <= S_ACC;
            if (!last_tx) tx <= tx + 6'd1;
            else begin
              tx <= '0;
              if (!last_ty) ty <= ty + 6'd1;
              else begin
                ty <= '0;
                if (!last_oc) begin
                  oc        <= oc + 6'd1;
                  slot_base <= slot_base + cfg.in_ch;
                end else state <= S_DRAIN;
              end
            end
          end
        end
        S_DRAIN: if (inflight == 2'd0 && agg_ready && !psum_valid) begin
          state  <= S_IDLE;
          busy   <= 1'b0;
          done   <= 1'b1;
          pp_sel <= ~pp_sel;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_fin_needs_ready: assert property (@(posedge clk) disable iff (!rst_n) sc_fin |-> agg_ready)
    else $error("sia_controller: final cycle issued while aggregation busy");
  a_cfg_sane: assert property (@(posedge clk) disable iff (!rst_n)
      start && state == S_IDLE |-> cfg.in_ch != 0 && cfg.out_ch != 0 && cfg.ksize != 0 &&
                                   cfg.in_w != 0 && cfg.in_h != 0)
    else $error("sia_controller: empty layer configuration");
endmodule
