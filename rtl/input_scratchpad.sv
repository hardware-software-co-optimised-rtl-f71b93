// input_scratchpad: 128-byte buffer of input spikes.
//
// Holds the spike map of the current layer pass and timestep, one bit per
// presynaptic neuron, laid out channel by channel and row-major inside a
// channel (bit index = ch*H*W + y*W + x). The processor writes it in 32-bit
// words; the whole vector is visible to the spiking core at once so that all
// 64 PEs can fetch their three spikes in the same cycle (a flip-flop buffer,
// as the published size of 128 bytes allows). Host reads return the word one
// cycle after the request. For a layer whose input is the previous layer's
// output, the layer input select writes up to eight single bits per cycle
// through the ld_* port instead; such bit writes take effect after a host
// write to the same word in the same cycle. The size follows the paper; the
// layout and the bit-write port are this design's choices.
module input_scratchpad import sia_pkg::*; #(
  parameter int unsigned BYTES = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  host_req_t            host,
  output logic [31:0]          host_rdata,
  output logic [BYTES*8-1:0]   spikes,
  // bit writes from the layer input select (previous layer's output)
  input  logic [7:0]                        ld_we,
  input  logic [7:0][$clog2(BYTES*8)-1:0]   ld_idx,
  input  logic [7:0]                        ld_val
);
  localparam int unsigned WORDS = BYTES / 4;
  localparam int unsigned AW    = $clog2(WORDS);
  logic [WORDS-1:0][31:0] mem;
  logic [AW-1:0] widx;

  assign widx   = host.addr[AW+1:2];
  assign spikes = mem;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem        <= '0;
      host_rdata <= '0;
    end else begin
      if (host.sel == SEL_INSPK) begin
        if (host.we)
          for (int b = 0; b < 4; b++)
            if (host.wstrb[b]) mem[widx][8*b +: 8] <= host.wdata[8*b +: 8];
        if (host.re) host_rdata <= mem[widx];
      end
      for (int c = 0; c < 8; c++)
        if (ld_we[c]) mem[ld_idx[c][$clog2(BYTES*8)-1:5]][ld_idx[c][4:0]] <= ld_val[c];
    end
  end
endmodule
