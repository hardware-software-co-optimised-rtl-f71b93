// spiking_core: 8x8 array of processing elements with its spike fetch.
//
// The 64 PEs compute one 8x8 tile of output neurons of one output channel in
// parallel: PE (r,c) owns the neuron at output position (oy0+r, ox0+c). All
// PEs share the kernel weights of the current row segment (W1..W3), and each
// fetches its own three input spikes (I1..I3) from the input spike map at
//   iy = (oy0+r)*S + kr - pad,  ix = (ox0+c)*S + kc + m - pad,  m = 0..2,
// with S the stride and pad = (K-1)/2 ("same" padding); positions outside
// the map read as no spike. The array, the three-weight PE and the
// broadcast of kernel data follow the paper; the mapping of PEs to output
// positions, the padding and the stride support are this design's choices.
//
// Timing: a command presented in cycle n is registered here (spike fetch)
// while the weight scratchpad delivers the matching weights at the same edge;
// the PEs act on it in cycle n+1. psum_valid rises the cycle after the PEs
// execute a 'fin' command, i.e. two cycles after it was presented.
module spiking_core import sia_pkg::*; #(
  parameter int unsigned ROWS    = 8,
  parameter int unsigned COLS    = 8,
  parameter int unsigned IN_BITS = 1024
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [IN_BITS-1:0]          spikes,    // input spike map
  // command (cycle n)
  input  logic                        acc_en,
  input  logic                        clr,
  input  logic                        fin,
  input  logic [$clog2(IN_BITS)-1:0]  ch_base,   // bit offset of the input channel
  input  logic [5:0]                  in_w,
  input  logic [5:0]                  in_h,
  input  logic [3:0]                  ksize,
  input  logic                        stride2,
  input  logic [5:0]                  oy0,
  input  logic [5:0]                  ox0,
  input  logic [3:0]                  kr,
  input  logic [3:0]                  kc,
  // weights (valid in cycle n+1)
  input  logic [2:0][7:0]             w,
  // partial sums
  output logic [ROWS*COLS-1:0][15:0]  psum,
  output logic                        psum_valid
);
  logic [ROWS*COLS-1:0][2:0] spk_d, spk_q;
  logic acc_q, clr_q, fin_q;
  logic [ROWS*COLS-1:0] pv;

  // spike fetch for every PE and multiplexer
  always_comb begin
    int pad, s, iy, ix, idx;
    pad = (int'(ksize) - 1) / 2;
    s   = stride2 ? 2 : 1;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        for (int m = 0; m < 3; m++) begin
          iy  = (int'(oy0) + r) * s + int'(kr) - pad;
          ix  = (int'(ox0) + c) * s + int'(kc) + m - pad;
          idx = int'(ch_base) + iy * int'(in_w) + ix;
          if (iy >= 0 && iy < int'(in_h) && ix >= 0 && ix < int'(in_w) && idx < IN_BITS)
            spk_d[r*COLS+c][m] = spikes[idx[$clog2(IN_BITS)-1:0]];
          else
            spk_d[r*COLS+c][m] = 1'b0;
        end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spk_q <= '0;
      acc_q <= 1'b0;
      clr_q <= 1'b0;
      fin_q <= 1'b0;
    end else begin
      spk_q <= spk_d;
      acc_q <= acc_en;
      clr_q <= clr;
      fin_q <= fin;
    end
  end

  for (genvar i = 0; i < ROWS*COLS; i++) begin : g_pe
    pe #(.W_BITS(8), .PSUM_BITS(16)) u_pe (
      .clk, .rst_n,
      .w(w), .spk(spk_q[i]),
      .acc_en(acc_q), .clr(clr_q), .fin(fin_q),
      .psum(psum[i]), .psum_valid(pv[i])
    );
  end

  assign psum_valid = &pv;   // all PEs share one control, so all agree
endmodule
