// output_scratchpad: 56 kB buffer of output spikes.
//
// The aggregation core writes one byte per PE row of a tile: bit c is the
// spike of the neuron in PE column c. The processor reads the buffer in
// 32-bit words (one-cycle latency) and forwards the spikes to the next layer
// or keeps them as the network output. A second byte read port (one-cycle
// latency, not reset) lets the layer input select copy a layer's output into
// the input scratchpad as the next layer's input. Size follows the paper; the byte
// packing is this design's choice. The buffer is not cleared at reset; the
// processor reads only what a pass has written.
module output_scratchpad import sia_pkg::*; #(
  parameter int unsigned BYTES = 57344
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  host_req_t                    host,
  output logic [31:0]                  host_rdata,
  input  logic                         wr_en,
  input  logic [$clog2(BYTES)-1:0]     wr_addr,
  input  logic [7:0]                   wr_data,
  input  logic                         rd_en,
  input  logic [$clog2(BYTES)-1:0]     rd_addr,
  output logic [7:0]                   rd_data
);
  localparam int unsigned WORDS = BYTES / 4;
  localparam int unsigned AW    = $clog2(WORDS);
  logic [3:0][7:0] mem [WORDS];
  logic [AW-1:0] hw;
  assign hw = host.addr[AW+1:2];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr[$clog2(BYTES)-1:2]][wr_addr[1:0]] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr[$clog2(BYTES)-1:2]][rd_addr[1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) host_rdata <= '0;
    else if (host.sel == SEL_OUTPUT && host.re) host_rdata <= mem[hw];
  end
endmodule
