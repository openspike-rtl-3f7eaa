// neuron_input_selector: feeds the MAC units of the N neurons.
//
// For the layer whose synapses are being accumulated it routes spikes and
// weights to every MAC unit and says which units are enabled:
//  * LAYER_IN : neuron i has a single synapse. Its spike is bit i of the input
//               spike cache and its weight bit i of the input-layer weight row;
//               the other FANIN-1 lanes carry no spike.
//  * LAYER_HID: the FANIN stored spikes of the previous layer are broadcast to
//               all N neurons; neuron i takes weights w_hid[i*FANIN +: FANIN].
//  * LAYER_OUT: as LAYER_HID but only the first N_OUT neurons are enabled, with
//               weights w_out[i*FANIN +: FANIN].
// Nothing is enabled when valid is low. Purely combinational.
// The paper names this block; the routing is this design's reading of the data
// flow it describes.
module neuron_input_selector
  import snn_pkg::*;
#(
  parameter int unsigned N     = 1024,
  parameter int unsigned N_OUT = 10,
  parameter int unsigned FANIN = 4,
  parameter int unsigned WOUT_W = 64
) (
  input  logic                 valid,
  input  layer_e               layer,
  input  logic [FANIN-1:0]     spikes,
  input  logic [N-1:0]         cache,
  input  logic [N-1:0]         w_in,
  input  logic [N*FANIN-1:0]   w_hid,
  input  logic [WOUT_W-1:0]    w_out,
  output logic [FANIN-1:0]     x  [N],
  output logic [FANIN-1:0]     w  [N],
  output logic [N-1:0]         en
);

  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      x[i]  = '0;
      w[i]  = '0;
      en[i] = 1'b0;
      unique case (layer)
        LAYER_IN: begin
          x[i][0] = cache[i];
          w[i][0] = w_in[i];
          en[i]   = valid;
        end
        LAYER_HID: begin
          x[i]  = spikes;
          w[i]  = w_hid[i*FANIN +: FANIN];
          en[i] = valid;
        end
        LAYER_OUT: begin
          if (i < int'(N_OUT)) begin
            x[i]  = spikes;
            w[i]  = w_out[i*FANIN +: FANIN];
            en[i] = valid;
          end
        end
        default: ;
      endcase
    end
  end

endmodule
