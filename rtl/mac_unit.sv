// mac_unit: multiply-accumulate unit of one hardware neuron.
//
// Each cycle with en set the unit adds up to FANIN synaptic products x*w, where
// x is a binary spike and w a binarized weight (1 = +1, 0 = -1), so a product is
// +1, -1 or 0. With clear set the accumulator restarts from this cycle's sum (or
// from zero when en is low), which begins a new layer. acc is registered: it
// shows the sum the cycle after the last accumulation.
// Four connections per cycle and binarized weights follow the paper; the
// accumulator width (enough for N = 1024 inputs) and the clear protocol are this
// design's choice.
module mac_unit #(
  parameter int unsigned FANIN = 4,
  parameter int unsigned ACC_W = 12
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    clear,
  input  logic [FANIN-1:0]        x,
  input  logic [FANIN-1:0]        w,
  output logic signed [ACC_W-1:0] acc
);

  logic signed [ACC_W-1:0] psum;

  always_comb begin
    psum = '0;
    for (int k = 0; k < int'(FANIN); k++) begin
      if (x[k]) psum = w[k] ? psum + ACC_W'(1) : psum - ACC_W'(1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (clear) acc <= en ? psum : '0;
    else if (en)    acc <= acc + psum;
  end

endmodule
