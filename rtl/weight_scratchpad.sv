// weight_scratchpad: 8 KB kernel buffer, 64 slots of 128 bytes.
//
// Each slot holds one KxK kernel of signed 8-bit weights, row-major from the
// slot's first byte, so kernels up to 11x11 fit. Per cycle the spiking core
// asks for one segment of a kernel row: slot, row kr and first column kc; the
// three weights at columns kc, kc+1, kc+2 appear one cycle later (block-RAM
// style synchronous read), with columns at or past K returned as zero so a
// row whose length is not a multiple of three is padded. The processor
// writes 32-bit words and may read them back (one-cycle latency). Size and
// kernel count follow the paper; the slot layout is this design's choice.
module weight_scratchpad import sia_pkg::*; #(
  parameter int unsigned BYTES     = 8192,
  parameter int unsigned N_SLOTS   = 64
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  host_req_t             host,
  output logic [31:0]           host_rdata,
  input  logic [5:0]            rd_slot,
  input  logic [3:0]            rd_kr,
  input  logic [3:0]            rd_kc,
  input  logic [3:0]            ksize,
  output logic [2:0][7:0]       rd_w
);
  localparam int unsigned WORDS = BYTES / 4;
  localparam int unsigned AW    = $clog2(WORDS);
  localparam int unsigned BW    = $clog2(BYTES);
  localparam int unsigned SLOT  = BYTES / N_SLOTS;

  logic [7:0] mem [BYTES];
  logic [AW-1:0] widx;
  assign widx = host.addr[AW+1:2];

  always_ff @(posedge clk) begin
    if (host.sel == SEL_WEIGHT && host.we)
      for (int b = 0; b < 4; b++)
        if (host.wstrb[b]) mem[{widx, 2'(b)}] <= host.wdata[8*b +: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) host_rdata <= '0;
    else if (host.sel == SEL_WEIGHT && host.re)
      host_rdata <= {mem[{widx, 2'd3}], mem[{widx, 2'd2}], mem[{widx, 2'd1}], mem[{widx, 2'd0}]};
  end

  // three read ports into one kernel slot
  logic [2:0][BW-1:0] ra;
  logic [2:0]         rv;
  always_comb begin
    for (int m = 0; m < 3; m++) begin
      int unsigned col, a;
      col   = int'(rd_kc) + m;
      a     = int'(rd_slot) * SLOT + int'(rd_kr) * int'(ksize) + col;
      rv[m] = (col < int'(ksize)) && (a < BYTES);
      ra[m] = BW'(a);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_w <= '0;
    else
      for (int m = 0; m < 3; m++) rd_w[m] <= rv[m] ? mem[ra[m]] : 8'h00;
  end
endmodule
