// sia_pkg: types and constants shared by the spiking inference accelerator.
//
// The accelerator computes spiking convolution layers on an 8x8 array of
// multiplier-free processing elements, then applies batch normalisation and an
// integrate-and-fire (IF) or leaky integrate-and-fire (LIF) activation with
// reset-by-subtraction. The sizes below are the published ones: 8-bit weights,
// 16-bit partial sums, potentials and thresholds, a 128-byte input spike
// buffer, an 8 KB weight buffer holding 64 kernels, 128 kB for residual
// partial sums, 64 kB of ping-pong membrane state and a 56 kB output buffer.
// Word widths, the fixed-point format of the batch-norm gain, the register
// map and the maximum kernel size of 11 are choices of this implementation.
package sia_pkg;

  // ---- datapath widths ----
  localparam int unsigned W_BITS     = 8;   // kernel weights
  localparam int unsigned PSUM_BITS  = 16;  // partial sums
  localparam int unsigned V_BITS     = 16;  // membrane potential, threshold
  localparam int unsigned BN_FRAC    = 8;   // G is a signed Q8.8 number

  // ---- spiking core ----
  localparam int unsigned PE_ROWS    = 8;
  localparam int unsigned PE_COLS    = 8;
  localparam int unsigned N_PE       = PE_ROWS * PE_COLS;
  localparam int unsigned MAX_K      = 11;  // largest kernel (5x5, 7x7, 11x11 are evaluated)

  // ---- memories (bytes) ----
  localparam int unsigned IN_BYTES     = 128;
  localparam int unsigned WEIGHT_BYTES = 8192;
  localparam int unsigned N_KERNELS    = 64;
  localparam int unsigned SLOT_BYTES   = WEIGHT_BYTES / N_KERNELS;  // 128 >= 11*11
  localparam int unsigned RES_BYTES    = 131072;
  localparam int unsigned MEMPOT_BYTES = 65536;
  localparam int unsigned OUT_BYTES    = 57344;

  // one memory word of the aggregation side carries one PE row: 8 x 16 bit
  localparam int unsigned LANES      = PE_COLS;
  localparam int unsigned LANE_WORD  = LANES * V_BITS;           // 128 bits

  // ---- host (AXI4-Lite) address map, byte addresses ----
  localparam int unsigned HADDR_W     = 18;
  localparam logic [HADDR_W-1:0] A_CTRL     = 18'h00000;  // W: bit0 start, bit1 clear ping-pong select
  localparam logic [HADDR_W-1:0] A_STATUS   = 18'h00004;  // R: bit0 busy, bit1 done, bit2 ping-pong select
  localparam logic [HADDR_W-1:0] A_SHAPE    = 18'h00008;  // [5:0] in_w, [13:8] in_h, [19:16] k, [20] stride 2
  localparam logic [HADDR_W-1:0] A_CHANS    = 18'h0000C;  // [6:0] in_ch, [22:16] out_ch
  localparam logic [HADDR_W-1:0] A_NEURON   = 18'h00010;  // [15:0] vth, [19:16] leak, [24] lif, [25] first_ts, [26] res_en, [27] chain
  localparam logic [HADDR_W-1:0] A_OUTBASE  = 18'h00014;  // [15:0] output byte base
  localparam logic [HADDR_W-1:0] A_RESBASE  = 18'h00018;  // [12:0] residual word base
  localparam logic [HADDR_W-1:0] A_CYCLES   = 18'h0001C;  // R: cycles of the last pass
  localparam logic [HADDR_W-1:0] A_STALLS   = 18'h00020;  // R: stall cycles of the last pass
  localparam logic [HADDR_W-1:0] A_SRCBASE  = 18'h00024;  // [15:0] output byte base of the previous layer's spikes
  localparam logic [HADDR_W-1:0] A_BN       = 18'h00100;  // 64 words: [31:16] G, [15:0] H
  localparam logic [HADDR_W-1:0] A_INSPK    = 18'h00200;  // 128 bytes of input spikes
  localparam logic [HADDR_W-1:0] A_WEIGHT   = 18'h02000;  // 8 KB of weights
  localparam logic [HADDR_W-1:0] A_OUTPUT   = 18'h10000;  // 56 kB of output spikes (read only)
  localparam logic [HADDR_W-1:0] A_RESID    = 18'h20000;  // 128 kB of residual partial sums

  typedef enum logic [2:0] {
    SEL_NONE, SEL_REG, SEL_BN, SEL_INSPK, SEL_WEIGHT, SEL_OUTPUT, SEL_RESID
  } hsel_e;

  // one host access, fanned out to all memories; each acts on its own select
  typedef struct packed {
    hsel_e               sel;
    logic                we;
    logic                re;
    logic [HADDR_W-1:0]  addr;   // byte address inside the region
    logic [31:0]         wdata;
    logic [3:0]          wstrb;
  } host_req_t;

  // configuration of one layer pass (one timestep of up to 64 kernels)
  typedef struct packed {
    logic [5:0]          in_w;      // input map width  (1..32)
    logic [5:0]          in_h;      // input map height (1..32)
    logic [3:0]          ksize;     // kernel side K (1..11); padding (K-1)/2
    logic                stride2;   // 0: stride 1, 1: stride 2
    logic [6:0]          in_ch;     // input channels in this pass (1..64)
    logic [6:0]          out_ch;    // output channels in this pass (1..64)
    logic signed [15:0]  vth;       // layer threshold
    logic [3:0]          leak;      // LIF leak shift: U -= U >>> leak
    logic                lif;       // 0: IF, 1: LIF
    logic                first_ts;  // previous potentials read as zero
    logic                res_en;    // add residual partial sums before batch norm
    logic [15:0]         out_base;  // output memory byte base
    logic [12:0]         res_base;  // residual memory word base
    logic                chain;     // input = previous layer's output, copied first
    logic [15:0]         src_base;  // output memory byte base of that output
  } layer_cfg_t;

  // saturate a wide signed value to 16 bits
  function automatic logic signed [15:0] sat16(input logic signed [33:0] v);
    if (v > 34'sd32767)       return 16'sh7fff;
    else if (v < -34'sd32768) return 16'sh8000;
    else                      return v[15:0];
  endfunction

  // number of 3-weight segments needed to cover one kernel row
  function automatic logic [2:0] n_chunks(input logic [3:0] k);
    if (k <= 4'd3)      return 3'd1;
    else if (k <= 4'd6) return 3'd2;
    else if (k <= 4'd9) return 3'd3;
    else                return 3'd4;
  endfunction

endpackage
