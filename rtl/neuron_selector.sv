// neuron_selector: connects the SEL-wide MAU/spike path to the N neurons.
//
// In each cycle it selects group `group` of SEL consecutive neurons
// (neurons group*SEL .. group*SEL+SEL-1). It routes the SEL decayed potentials
// dec_in into the potential adders of the selected neurons (the others receive
// zero) and returns the sums of those same adders on sel_sum. Purely
// combinational. Sixteen neurons per cycle, 64 cycles for 1024 neurons, follows
// the paper.
module neuron_selector
  import snn_pkg::*;
#(
  parameter int unsigned N   = 1024,
  parameter int unsigned SEL = 16,
  localparam int unsigned GW = $clog2(N / SEL)
) (
  input  logic [GW-1:0]           group,
  input  logic signed [POT_W-1:0] dec_in  [SEL],
  output logic signed [POT_W-1:0] dec_out [N],
  input  logic signed [POT_W-1:0] sum_in  [N],
  output logic signed [POT_W-1:0] sel_sum [SEL]
);

  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      dec_out[i] = (i / int'(SEL) == int'(group)) ? dec_in[i % int'(SEL)] : '0;
    end
    for (int j = 0; j < int'(SEL); j++) begin
      sel_sum[j] = sum_in[int'(group) * int'(SEL) + j];
    end
  end

endmodule
