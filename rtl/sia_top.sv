// sia_top: spiking inference accelerator (programmable-logic part).
//
// A processor drives the accelerator over one AXI4-Lite port. Per layer
// pass and timestep it loads the input spikes, up to 64 kernels, the
// batch-norm coefficients and, for residual layers, precomputed partial sums,
// then writes 'start'. The controller walks the output map in 8x8 tiles; the
// spiking core's 64 multiplier-free PEs accumulate the kernel weights selected
// by input spikes; the aggregation core adds residual sums, batch-normalises,
// integrates into the membrane potential of the previous timestep (ping-pong
// store), fires against the layer threshold with reset-by-subtraction and
// writes the output spikes, which the processor reads back. For every layer
// after the first the processor may instead set the chain flag: the pass
// then begins by copying the previous layer's output spikes from the output
// buffer into the input scratchpad (layer input select). 'done' rises at
// the end of the pass and can serve as an interrupt.
//
// The block structure, the sizes of the buffers and the per-stage operations
// follow the paper; the tiling, the kernel-slot layout, the word
// organisation of the buffers and the register map are this design's own.
module sia_top import sia_pkg::*; #(
  parameter int unsigned IN_BYTES_P     = 128,
  parameter int unsigned WEIGHT_BYTES_P = 8192,
  parameter int unsigned RES_BYTES_P    = 131072,
  parameter int unsigned MEMPOT_BYTES_P = 65536,
  parameter int unsigned OUT_BYTES_P    = 57344
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [HADDR_W-1:0]  s_awaddr,
  input  logic                s_awvalid,
  output logic                s_awready,
  input  logic [31:0]         s_wdata,
  input  logic [3:0]          s_wstrb,
  input  logic                s_wvalid,
  output logic                s_wready,
  output logic [1:0]          s_bresp,
  output logic                s_bvalid,
  input  logic                s_bready,
  input  logic [HADDR_W-1:0]  s_araddr,
  input  logic                s_arvalid,
  output logic                s_arready,
  output logic [31:0]         s_rdata,
  output logic [1:0]          s_rresp,
  output logic                s_rvalid,
  input  logic                s_rready,
  output logic                done
);
  localparam int unsigned IN_BITS = IN_BYTES_P * 8;
  localparam int unsigned MP_AW   = $clog2(MEMPOT_BYTES_P / 32);
  localparam int unsigned RES_AW  = $clog2(RES_BYTES_P / 16);
  localparam int unsigned OUT_AW  = $clog2(OUT_BYTES_P);

  host_req_t  host;
  layer_cfg_t cfg;
  logic [31:0] rd_inspk, rd_weight, rd_output, rd_resid, cycles, stalls;
  logic start, pp_clear, busy, pp_sel;
  logic [5:0] bn_ch;
  logic signed [15:0] bn_g, bn_h;

  logic [IN_BITS-1:0] spikes;
  logic [2:0][7:0]    w;
  logic sc_acc, sc_clr, sc_fin;
  logic [$clog2(IN_BITS)-1:0] sc_ch_base;
  logic [5:0] sc_oy0, sc_ox0, w_slot, tile_ch;
  logic [3:0] sc_kr, sc_kc;
  logic [63:0][15:0] psum;
  logic psum_valid, agg_ready;
  logic [MP_AW-1:0] tile_mword;
  logic [63:0] tile_mask;

  logic mp_rd_en, mp_wr_en, res_rd_en, out_wr_en;
  logic [MP_AW-1:0] mp_rd_addr, mp_wr_addr;
  logic [RES_AW-1:0] res_rd_addr;
  logic [OUT_AW-1:0] out_wr_addr;
  logic [LANE_WORD-1:0] mp_rd_data, mp_wr_data, res_rd_data;
  logic [7:0] out_wr_data;

  // layer input select (previous layer's output -> input scratchpad)
  logic ls_go, ls_busy, ls_done, ls_rd_en;
  logic [OUT_AW-1:0] ls_rd_addr;
  logic [7:0] ls_rd_data, ld_we, ld_val;
  logic [7:0][$clog2(IN_BITS)-1:0] ld_idx;

  axil_config #(.N_BN(N_KERNELS)) u_cfg (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .host, .rd_inspk, .rd_weight, .rd_output, .rd_resid,
    .cfg, .start, .pp_clear, .busy, .done, .pp_sel, .cycles, .stalls,
    .bn_ch, .bn_g, .bn_h
  );

  input_scratchpad #(.BYTES(IN_BYTES_P)) u_in (
    .clk, .rst_n, .host, .host_rdata(rd_inspk), .spikes, .ld_we, .ld_idx, .ld_val
  );

  weight_scratchpad #(.BYTES(WEIGHT_BYTES_P), .N_SLOTS(N_KERNELS)) u_w (
    .clk, .rst_n, .host, .host_rdata(rd_weight),
    .rd_slot(w_slot), .rd_kr(sc_kr), .rd_kc(sc_kc), .ksize(cfg.ksize), .rd_w(w)
  );

  sia_controller #(.IN_BITS(IN_BITS), .MP_AW(MP_AW)) u_ctl (
    .clk, .rst_n, .cfg, .start, .pp_clear, .busy, .done, .pp_sel, .cycles, .stalls,
    .sc_acc, .sc_clr, .sc_fin, .sc_ch_base, .sc_oy0, .sc_ox0, .sc_kr, .sc_kc, .w_slot,
    .psum_valid, .agg_ready, .tile_ch, .tile_mword, .tile_mask,
    .ls_go, .ls_done
  );

  layer_input_select #(.IN_BITS(IN_BITS), .OUT_AW(OUT_AW)) u_sel (
    .clk, .rst_n, .go(ls_go), .cfg, .busy(ls_busy), .done(ls_done),
    .rd_en(ls_rd_en), .rd_addr(ls_rd_addr), .rd_data(ls_rd_data),
    .ld_we, .ld_idx, .ld_val
  );

  spiking_core #(.ROWS(PE_ROWS), .COLS(PE_COLS), .IN_BITS(IN_BITS)) u_sc (
    .clk, .rst_n, .spikes,
    .acc_en(sc_acc), .clr(sc_clr), .fin(sc_fin), .ch_base(sc_ch_base),
    .in_w(cfg.in_w), .in_h(cfg.in_h), .ksize(cfg.ksize), .stride2(cfg.stride2),
    .oy0(sc_oy0), .ox0(sc_ox0), .kr(sc_kr), .kc(sc_kc), .w,
    .psum, .psum_valid
  );

  aggregation_core #(.ROWS(PE_ROWS), .COLS(PE_COLS), .MP_AW(MP_AW), .RES_AW(RES_AW),
                     .OUT_AW(OUT_AW)) u_agg (
    .clk, .rst_n,
    .load(psum_valid), .ready(agg_ready), .psum, .ch(tile_ch), .mword(tile_mword),
    .mask(tile_mask), .cfg, .bn_ch, .bn_g, .bn_h,
    .mp_rd_en, .mp_rd_addr, .mp_rd_data, .mp_wr_en, .mp_wr_addr, .mp_wr_data,
    .res_rd_en, .res_rd_addr, .res_rd_data,
    .out_wr_en, .out_wr_addr, .out_wr_data
  );

  membrane_pingpong #(.BYTES(MEMPOT_BYTES_P)) u_mp (
    .clk, .sel(pp_sel),
    .rd_en(mp_rd_en), .rd_addr(mp_rd_addr), .rd_data(mp_rd_data),
    .wr_en(mp_wr_en), .wr_addr(mp_wr_addr), .wr_data(mp_wr_data)
  );

  residual_memory #(.BYTES(RES_BYTES_P)) u_res (
    .clk, .rst_n, .host, .host_rdata(rd_resid),
    .rd_en(res_rd_en), .rd_addr(res_rd_addr), .rd_data(res_rd_data)
  );

  output_scratchpad #(.BYTES(OUT_BYTES_P)) u_out (
    .clk, .rst_n, .host, .host_rdata(rd_output),
    .wr_en(out_wr_en), .wr_addr(out_wr_addr), .wr_data(out_wr_data),
    .rd_en(ls_rd_en), .rd_addr(ls_rd_addr), .rd_data(ls_rd_data)
  );

  a_copy_in_pass: assert property (@(posedge clk) disable iff (!rst_n) ls_busy |-> busy)
    else $error("sia_top: layer input copy outside a pass");
endmodule
