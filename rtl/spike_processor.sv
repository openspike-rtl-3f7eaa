// spike_processor: input spike cache and spike emission.
//
//  * Input spike cache: an N-bit register (128 bytes for N = 1024) holding the
//    input frame of the next time step. It is filled in BEATS beats of N/BEATS
//    bits (load, beat, load_data) and read in one piece by the input layer.
//  * Spike emission: SEL Schmitt triggers turn the SEL new potentials of the
//    selected neurons into spikes z and new inhibition bits inh_new.
// The cache is registered (visible the cycle after a load); the triggers are
// combinational. A 128-byte cache loaded in 8 cycles and Schmitt-trigger
// emission follow the paper; the beat order (beat b fills bits b*N/BEATS up) is
// this design's choice.
module spike_processor
  import snn_pkg::*;
#(
  parameter int unsigned N     = 1024,
  parameter int unsigned SEL   = 16,
  parameter int unsigned BEATS = 8,
  localparam int unsigned BW   = N / BEATS,
  localparam int unsigned BIW  = (BEATS > 1) ? $clog2(BEATS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // input spike cache
  input  logic                    load,
  input  logic [BIW-1:0]          beat,
  input  logic [BW-1:0]           load_data,
  output logic [N-1:0]            cache,
  // spike emission
  input  logic signed [POT_W-1:0] u      [SEL],
  input  logic [SEL-1:0]          inh_old,
  input  logic signed [POT_W-1:0] uthr_h,
  input  logic signed [POT_W-1:0] uthr_l,
  output logic [SEL-1:0]          z,
  output logic [SEL-1:0]          inh_new
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    cache <= '0;
    else if (load) cache[int'(beat)*BW +: BW] <= load_data;
  end

  for (genvar i = 0; i < int'(SEL); i++) begin : g_st
    schmitt_trigger u_st (
      .u(u[i]), .uthr_h(uthr_h), .uthr_l(uthr_l), .inh_old(inh_old[i]),
      .z(z[i]), .inh_new(inh_new[i])
    );
  end

endmodule
