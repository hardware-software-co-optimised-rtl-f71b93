// residual_memory: 128 kB of residual partial sums from the processor.
//
// For residual layers the processor supplies partial sums computed
// elsewhere; the aggregation core adds them to the spiking core's partial
// sums before batch normalisation. The memory is organised as 128-bit words
// of eight signed 16-bit lanes, one word per PE row of a tile, matching the
// eight activation lanes. The processor writes and reads 32-bit halves of a
// lane pair (byte address bits [3:2] pick the pair); the aggregation core
// reads whole words with one-cycle latency. The 128 kB size follows the
// paper; the word organisation is this design's choice.
module residual_memory import sia_pkg::*; #(
  parameter int unsigned BYTES = 131072
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  host_req_t                  host,
  output logic [31:0]                host_rdata,
  input  logic                       rd_en,
  input  logic [$clog2(BYTES/16)-1:0] rd_addr,
  output logic [LANE_WORD-1:0]       rd_data
);
  localparam int unsigned WORDS = BYTES / 16;
  localparam int unsigned AW    = $clog2(WORDS);
  logic [3:0][31:0] mem [WORDS];
  logic [AW-1:0] hw;
  logic [1:0]    hq;
  assign hw = host.addr[AW+3:4];
  assign hq = host.addr[3:2];

  always_ff @(posedge clk) begin
    if (host.sel == SEL_RESID && host.we)
      for (int b = 0; b < 4; b++)
        if (host.wstrb[b]) mem[hw][hq][8*b +: 8] <= host.wdata[8*b +: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      host_rdata <= '0;
      rd_data    <= '0;
    end else begin
      if (host.sel == SEL_RESID && host.re) host_rdata <= mem[hw][hq];
      if (rd_en) rd_data <= mem[rd_addr];
    end
  end
endmodule
