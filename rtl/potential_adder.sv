// potential_adder: second stage of a hardware neuron.
//
// On load it captures the MAC result of the layer just finished, so the MAC can
// start on the next layer while this stage finishes the previous one. Its sum
// output is the held input current plus the decayed membrane potential that the
// neuron selector routes in (dec_in), saturated to the 8-bit potential. The sum
// is combinational; the neuron selector reads it in the same cycle.
// The split into MAC and potential adder and the hand-over between layers follow
// the paper; saturation to 8 bits is this design's choice.
module potential_adder
  import snn_pkg::*;
#(
  parameter int unsigned ACC_W = 12
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,
  input  logic signed [ACC_W-1:0] mac_in,
  input  logic signed [POT_W-1:0] dec_in,
  output logic signed [POT_W-1:0] sum
);

  logic signed [ACC_W-1:0] hold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    hold <= '0;
    else if (load) hold <= mac_in;
  end

  always_comb sum = sat_pot(16'(hold) + 16'(dec_in));

endmodule
