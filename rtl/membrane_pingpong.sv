// membrane_pingpong: 64 kB membrane-potential store in two halves.
//
// The store is split into two equal banks, U1-State and U2-State. During a
// timestep the activation reads the previous timestep's potentials from one
// bank while the updated potentials are written into the other; the roles
// swap every timestep, so a potential is never overwritten before it is read.
// 'sel' = 0 reads U1 and writes U2 (the first timestep of the published
// figure), 'sel' = 1 reads U2 and writes U1. The two halves and their
// alternation follow the paper. Word organisation (eight 16-bit lanes per
// 128-bit word, one word per PE row of a tile) and the one-cycle synchronous
// read are this design's choices. Bank contents are not reset; the
// aggregation core ignores them in the first timestep of a layer.
module membrane_pingpong import sia_pkg::*; #(
  parameter int unsigned BYTES = 65536
) (
  input  logic                   clk,
  input  logic                   sel,       // bank read in this timestep
  input  logic                   rd_en,
  input  logic [$clog2(BYTES/32)-1:0] rd_addr,
  output logic [LANE_WORD-1:0]   rd_data,
  input  logic                   wr_en,
  input  logic [$clog2(BYTES/32)-1:0] wr_addr,
  input  logic [LANE_WORD-1:0]   wr_data
);
  localparam int unsigned HALF_WORDS = BYTES / 2 / (LANE_WORD / 8);
  logic [LANE_WORD-1:0] u1 [HALF_WORDS];
  logic [LANE_WORD-1:0] u2 [HALF_WORDS];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= sel ? u2[rd_addr] : u1[rd_addr];
    if (wr_en) begin
      if (sel) u1[wr_addr] <= wr_data;
      else     u2[wr_addr] <= wr_data;
    end
  end
endmodule
