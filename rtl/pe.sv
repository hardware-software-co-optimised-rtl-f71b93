// pe: one processing element of the spiking core.
//
// Multiplier-free synaptic integration. Three 2:1 multiplexers each pass
// either a kernel weight (W1..W3) or zero, chosen by the matching input spike
// (I1..I3); an adder sums the three selected weights with the running partial
// sum. One accumulate cycle consumes one segment of three weights of a kernel
// row, so a 3x3 kernel takes three accumulate cycles, and one final cycle
// moves the accumulated value into the output register that the aggregation
// core reads. These steps and widths follow the published PE. This design's
// own choices: the accumulator is 16 bits wide (the published adder is
// called 8-bit but its partial sum 16-bit) and it saturates instead of
// wrapping; 'clr' restarts the sum in the same cycle as the first add.
//
// Timing: acc_en/clr/fin are sampled at the rising edge; psum_valid is high
// for the one cycle after a 'fin' cycle, and psum holds until the next 'fin'.
module pe #(
  parameter int unsigned W_BITS    = 8,
  parameter int unsigned PSUM_BITS = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [2:0][W_BITS-1:0]      w,        // W1..W3, signed
  input  logic [2:0]                  spk,      // I1..I3
  input  logic                        acc_en,   // add the selected weights
  input  logic                        clr,      // start a new sum with this add
  input  logic                        fin,      // transfer the sum to psum
  output logic signed [PSUM_BITS-1:0] psum,
  output logic                        psum_valid
);
  logic signed [PSUM_BITS-1:0] acc;
  logic signed [PSUM_BITS+1:0] sum;      // three weights plus the partial sum
  localparam logic signed [PSUM_BITS+1:0] MAXV = (PSUM_BITS+2)'(2**(PSUM_BITS-1) - 1);
  localparam logic signed [PSUM_BITS+1:0] MINV = -(PSUM_BITS+2)'(2**(PSUM_BITS-1));

  always_comb begin
    sum = clr ? '0 : (PSUM_BITS+2)'(acc);
    for (int i = 0; i < 3; i++)
      if (spk[i]) sum += (PSUM_BITS+2)'(signed'(w[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc        <= '0;
      psum       <= '0;
      psum_valid <= 1'b0;
    end else begin
      if (acc_en) begin
        if (sum > MAXV)      acc <= MAXV[PSUM_BITS-1:0];
        else if (sum < MINV) acc <= MINV[PSUM_BITS-1:0];
        else                 acc <= sum[PSUM_BITS-1:0];
      end
      psum_valid <= fin;
      if (fin) psum <= acc;
    end
  end
endmodule
