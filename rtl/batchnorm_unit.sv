// batchnorm_unit: folded batch normalisation y*G + H, one lane.
//
// Batch normalisation of a spiking layer acts on accumulated spikes, so it
// needs a real multiply; the published design keeps it out of the PEs and does
// it here with a fixed-point multiplier, followed by the bias addition. G and
// H are the folded coefficients loaded by the processor for each layer. Inputs
// and coefficients are 16-bit as published. This design's own choices: G is a
// signed fixed-point number with FRAC fractional bits (Q8.8 by default), the
// product is shifted right arithmetically (rounding towards minus infinity),
// and the result saturates to 16 bits. Purely combinational.
module batchnorm_unit #(
  parameter int unsigned FRAC = 8
) (
  input  logic signed [15:0] y,   // conv partial sum (plus residual)
  input  logic signed [15:0] g,   // gain G
  input  logic signed [15:0] h,   // bias H
  output logic signed [15:0] ybn
);
  logic signed [31:0] prod;
  logic signed [33:0] acc;
  always_comb begin
    prod = y * g;
    acc  = 34'(prod >>> FRAC) + 34'(h);
    ybn  = sia_pkg::sat16(acc);
  end
endmodule
