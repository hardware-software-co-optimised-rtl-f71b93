// axil_config: AXI4-Lite slave with the configuration registers.
//
// The processor reaches everything in the accelerator through this 32-bit
// AXI4-Lite port: the layer registers (shape, channel counts, threshold,
// IF/LIF mode, leak, first-timestep, residual and chain flags, buffer bases), a
// table of batch-norm coefficients G and H for up to 64 output channels,
// a start command, status and cycle/stall counters, and windows into the
// input, weight, output and residual buffers (address map in sia_pkg).
// The use of AXI4-Lite, the per-layer threshold, the mode bit and the
// layer-wise G/H transfer follow the paper; the register map, the error
// response for unmapped addresses and the handshake timing are this design's
// choices.
//
// Handshake: a write is accepted when AWVALID and WVALID are both high and no
// response is pending; BVALID follows one cycle later and holds until BREADY.
// A read is accepted when no write is accepted in the same cycle and no read
// is in progress; RVALID follows three cycles later (request register, memory
// read, data register) and holds until RREADY. The buffers see one request
// per accepted access, registered, on the shared 'host' bus.
module axil_config import sia_pkg::*; #(
  parameter int unsigned N_BN = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  // AXI4-Lite slave
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
  // to the buffers
  output host_req_t           host,
  input  logic [31:0]         rd_inspk,
  input  logic [31:0]         rd_weight,
  input  logic [31:0]         rd_output,
  input  logic [31:0]         rd_resid,
  // to the controller and aggregation core
  output layer_cfg_t          cfg,
  output logic                start,
  output logic                pp_clear,
  input  logic                busy,
  input  logic                done,
  input  logic                pp_sel,
  input  logic [31:0]         cycles,
  input  logic [31:0]         stalls,
  input  logic [5:0]          bn_ch,
  output logic signed [15:0]  bn_g,
  output logic signed [15:0]  bn_h
);
  logic [31:0] bn_tab [N_BN];
  logic [31:0] r_shape, r_chans, r_neuron, r_outbase, r_resbase, r_srcbase;

  function automatic hsel_e decode(input logic [HADDR_W-1:0] a);
    if (a < A_BN)                         return SEL_REG;
    if (a < A_INSPK)                      return SEL_BN;
    if (a < A_INSPK + 18'h80)             return SEL_INSPK;
    if (a >= A_WEIGHT && a < 18'h04000)   return SEL_WEIGHT;
    if (a >= A_OUTPUT && a < 18'h1E000)   return SEL_OUTPUT;
    if (a >= A_RESID)                     return SEL_RESID;
    return SEL_NONE;
  endfunction

  function automatic logic [HADDR_W-1:0] offset(input hsel_e s, input logic [HADDR_W-1:0] a);
    case (s)
      SEL_BN:     return a - A_BN;
      SEL_INSPK:  return a - A_INSPK;
      SEL_WEIGHT: return a - A_WEIGHT;
      SEL_OUTPUT: return a - A_OUTPUT;
      SEL_RESID:  return a - A_RESID;
      default:    return a;
    endcase
  endfunction

  // ---- handshake ----
  logic wr_acc, rd_acc;
  logic [1:0] rd_stage;            // 0 idle, 1 request out, 2 data back
  hsel_e      rd_sel;
  logic [HADDR_W-1:0] rd_off;

  assign wr_acc    = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_acc;
  assign s_wready  = wr_acc;
  assign rd_acc    = s_arvalid && !wr_acc && !s_rvalid && rd_stage == 2'd0;
  assign s_arready = rd_acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      host      <= '0;
      s_bvalid  <= 1'b0;
      s_bresp   <= 2'b00;
      s_rvalid  <= 1'b0;
      s_rresp   <= 2'b00;
      s_rdata   <= '0;
      rd_stage  <= 2'd0;
      rd_sel    <= SEL_NONE;
      rd_off    <= '0;
    end else begin
      host.we <= 1'b0;
      host.re <= 1'b0;
      if (wr_acc) begin
        host.sel   <= decode(s_awaddr);
        host.we    <= 1'b1;
        host.addr  <= offset(decode(s_awaddr), s_awaddr);
        host.wdata <= s_wdata;
        host.wstrb <= s_wstrb;
        s_bvalid   <= 1'b1;
        s_bresp    <= (decode(s_awaddr) == SEL_NONE || decode(s_awaddr) == SEL_OUTPUT) ? 2'b10 : 2'b00;
      end else if (rd_acc) begin
        host.sel  <= decode(s_araddr);
        host.re   <= 1'b1;
        host.addr <= offset(decode(s_araddr), s_araddr);
        rd_sel    <= decode(s_araddr);
        rd_off    <= offset(decode(s_araddr), s_araddr);
        rd_stage  <= 2'd1;
      end
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;

      if (rd_stage == 2'd1) rd_stage <= 2'd2;
      else if (rd_stage == 2'd2) begin
        rd_stage <= 2'd0;
        s_rvalid <= 1'b1;
        s_rresp  <= (rd_sel == SEL_NONE) ? 2'b10 : 2'b00;
        unique case (rd_sel)
          SEL_REG: case (rd_off[7:0])
            A_STATUS[7:0]:  s_rdata <= {29'd0, pp_sel, done, busy};
            A_SHAPE[7:0]:   s_rdata <= r_shape;
            A_CHANS[7:0]:   s_rdata <= r_chans;
            A_NEURON[7:0]:  s_rdata <= r_neuron;
            A_OUTBASE[7:0]: s_rdata <= r_outbase;
            A_RESBASE[7:0]: s_rdata <= r_resbase;
            A_CYCLES[7:0]:  s_rdata <= cycles;
            A_STALLS[7:0]:  s_rdata <= stalls;
            A_SRCBASE[7:0]: s_rdata <= r_srcbase;
            default:        s_rdata <= '0;
          endcase
          SEL_BN:     s_rdata <= bn_tab[rd_off[$clog2(N_BN)+1:2]];
          SEL_INSPK:  s_rdata <= rd_inspk;
          SEL_WEIGHT: s_rdata <= rd_weight;
          SEL_OUTPUT: s_rdata <= rd_output;
          SEL_RESID:  s_rdata <= rd_resid;
          default:    s_rdata <= '0;
        endcase
      end
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
    end
  end

  // ---- registers ----
  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] d,
                                        input logic [3:0] strb);
    for (int b = 0; b < 4; b++) if (strb[b]) old[8*b +: 8] = d[8*b +: 8];
    return old;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_shape   <= 32'h0003_0808;   // 8x8 input, 3x3 kernel, stride 1
      r_chans   <= 32'h0001_0001;
      r_neuron  <= 32'h0000_0100;   // threshold 256
      r_outbase <= '0;
      r_resbase <= '0;
      r_srcbase <= '0;
      start     <= 1'b0;
      pp_clear  <= 1'b0;
      for (int i = 0; i < N_BN; i++) bn_tab[i] <= 32'h0100_0000;  // G = 1.0, H = 0
    end else begin
      start    <= 1'b0;
      pp_clear <= 1'b0;
      if (host.we && host.sel == SEL_REG) begin
        case (host.addr[7:0])
          A_CTRL[7:0]: begin
            start    <= host.wdata[0] && host.wstrb[0];
            pp_clear <= host.wdata[1] && host.wstrb[0];
          end
          A_SHAPE[7:0]:   r_shape   <= merge(r_shape,   host.wdata, host.wstrb);
          A_CHANS[7:0]:   r_chans   <= merge(r_chans,   host.wdata, host.wstrb);
          A_NEURON[7:0]:  r_neuron  <= merge(r_neuron,  host.wdata, host.wstrb);
          A_OUTBASE[7:0]: r_outbase <= merge(r_outbase, host.wdata, host.wstrb);
          A_RESBASE[7:0]: r_resbase <= merge(r_resbase, host.wdata, host.wstrb);
          A_SRCBASE[7:0]: r_srcbase <= merge(r_srcbase, host.wdata, host.wstrb);
          default: ;
        endcase
      end
      if (host.we && host.sel == SEL_BN)
        bn_tab[host.addr[$clog2(N_BN)+1:2]] <=
          merge(bn_tab[host.addr[$clog2(N_BN)+1:2]], host.wdata, host.wstrb);
    end
  end

  always_comb begin
    cfg.in_w     = r_shape[5:0];
    cfg.in_h     = r_shape[13:8];
    cfg.ksize    = r_shape[19:16];
    cfg.stride2  = r_shape[20];
    cfg.in_ch    = r_chans[6:0];
    cfg.out_ch   = r_chans[22:16];
    cfg.vth      = signed'(r_neuron[15:0]);
    cfg.leak     = r_neuron[19:16];
    cfg.lif      = r_neuron[24];
    cfg.first_ts = r_neuron[25];
    cfg.res_en   = r_neuron[26];
    cfg.out_base = r_outbase[15:0];
    cfg.res_base = r_resbase[12:0];
    cfg.chain    = r_neuron[27];
    cfg.src_base = r_srcbase[15:0];
    bn_g         = signed'(bn_tab[bn_ch][31:16]);
    bn_h         = signed'(bn_tab[bn_ch][15:0]);
  end

  // AXI4-Lite: a response stays valid, with stable data, until it is taken
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
      s_bvalid && !s_bready |=> s_bvalid && $stable(s_bresp));
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
      s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
