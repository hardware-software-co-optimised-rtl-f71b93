// activation_unit: integrate-and-fire neuron update with reset-by-subtraction.
//
// The batch-normalised partial sum is added to the membrane potential of the
// previous timestep; the neuron spikes when the result is at or above the
// 16-bit layer threshold (Heaviside of U - Vth), and a spike subtracts the
// threshold from the potential. 'lif' selects the model: 0 is IF (no leak),
// 1 is LIF. These follow the published activation block. The leak itself is
// not specified there; this design leaks the previous potential by a shift,
// U_prev - (U_prev >>> leak), before the addition. All sums saturate to 16
// bits. Purely combinational.
module activation_unit (
  input  logic signed [15:0] x,        // batch-normalised partial sum
  input  logic signed [15:0] u_prev,   // potential of the previous timestep
  input  logic signed [15:0] vth,      // layer threshold
  input  logic               lif,      // 0: IF, 1: LIF
  input  logic [3:0]         leak,     // LIF leak shift
  output logic               spike,
  output logic signed [15:0] u_next    // potential stored for the next timestep
);
  logic signed [15:0] u_base, u_mem;
  always_comb begin
    u_base = lif ? sia_pkg::sat16(34'(u_prev) - 34'(u_prev >>> leak)) : u_prev;
    u_mem  = sia_pkg::sat16(34'(u_base) + 34'(x));
    spike  = (u_mem >= vth);
    u_next = spike ? sia_pkg::sat16(34'(u_mem) - 34'(vth)) : u_mem;
  end
endmodule
