// schmitt_trigger: spike emission with hysteresis for one neuron.
//
// A spike z is emitted when the membrane potential u is above the high
// threshold uthr_h and the neuron is not inhibited (inh_old, stored from the
// previous time step). The new inhibition bit is cleared only when the neuron
// did not spike and u has fallen below the low threshold uthr_l; otherwise it is
// set. A neuron that has spiked therefore cannot spike again until its
// potential has dropped below uthr_l. Purely combinational.
// The logic is the one drawn in the paper's spike-emission figure (comparators,
// inverters and AND gates) and its equations; the signed 8-bit compare is this
// design's choice.
module schmitt_trigger
  import snn_pkg::*;
(
  input  logic signed [POT_W-1:0] u,
  input  logic signed [POT_W-1:0] uthr_h,
  input  logic signed [POT_W-1:0] uthr_l,
  input  logic                    inh_old,
  output logic                    z,
  output logic                    inh_new
);

  always_comb begin
    z       = (u > uthr_h) & ~inh_old;
    inh_new = ~(~z & (u < uthr_l));
  end

endmodule
