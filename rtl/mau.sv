// mau: membrane potential arithmetic unit for the SEL neurons handled per cycle.
//
// Two functions, both combinational:
//  * Potential decay: the stored potentials u_old (read from the membrane SRAM)
//    are multiplied by each neuron's decay code beta, giving u_dec, which the
//    neuron selector loads into the neurons' potential adders.
//  * Potential reset: the new potentials u_new coming back from the potential
//    adders are reset, for every neuron that has just spiked (z), before they
//    are saved. With RESET_SUB = 1 the threshold uthr_h is subtracted (the
//    -z*u_thr term of the neuron equation), saturating; with RESET_SUB = 0 the
//    potential is set to zero.
// Decay by shift-and-add and reset-before-save follow the paper. The paper's
// equation subtracts the threshold while its text speaks of resetting the
// potential; subtraction is the default here.
module mau
  import snn_pkg::*;
#(
  parameter int unsigned SEL       = 16,
  parameter bit          RESET_SUB = 1'b1
) (
  input  logic signed [POT_W-1:0]   u_old [SEL],
  input  logic        [DECAY_W-1:0] beta  [SEL],
  output logic signed [POT_W-1:0]   u_dec [SEL],
  input  logic signed [POT_W-1:0]   u_new [SEL],
  input  logic        [SEL-1:0]     z,
  input  logic signed [POT_W-1:0]   uthr_h,
  output logic signed [POT_W-1:0]   u_save [SEL]
);

  for (genvar i = 0; i < int'(SEL); i++) begin : g_lane
    potential_decay u_decay (.u(u_old[i]), .beta(beta[i]), .u_dec(u_dec[i]));

    always_comb begin
      if (!z[i])          u_save[i] = u_new[i];
      else if (RESET_SUB) u_save[i] = sat_pot(16'(u_new[i]) - 16'(uthr_h));
      else                u_save[i] = '0;
    end
  end

endmodule
