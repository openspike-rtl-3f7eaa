// potential_decay: multiplies a membrane potential by the decay rate beta.
//
// beta is a 4-bit code counting eighths: code k gives beta = k/8 for k = 0..8,
// and codes above 8 give beta = 1. No multiplier is used: u is shifted right by
// 1, 2 and 3 (u/2, u/4, u/8, arithmetic shifts that round towards minus
// infinity), u/2 + u/4 forms 3u/4, a first multiplexer picks u/4, u/2 or 3u/4 to
// which u/8 is added for 3/8, 5/8 and 7/8, and a final multiplexer picks among
// 0, that sum, u/8, u/4, u/2, 3u/4 and u. Purely combinational.
// The shift-and-add structure and its selectable values are those of the
// paper's decay figure; the code assignment is this design's choice since the
// paper does not give the decoder's table.
module potential_decay
  import snn_pkg::*;
(
  input  logic signed [POT_W-1:0]  u,
  input  logic        [DECAY_W-1:0] beta,
  output logic signed [POT_W-1:0]  u_dec
);

  logic signed [POT_W-1:0] u2, u4, u8, u34, pre, odd8;

  always_comb begin
    u2   = u  >>> 1;
    u4   = u2 >>> 1;
    u8   = u4 >>> 1;
    u34  = u2 + u4;
    // first multiplexer and second adder: 3/8, 5/8, 7/8
    unique case (beta)
      4'd3:    pre = u4;
      4'd5:    pre = u2;
      default: pre = u34;
    endcase
    odd8 = pre + u8;
    // output multiplexer
    unique case (beta)
      4'd0:             u_dec = '0;
      4'd1:             u_dec = u8;
      4'd2:             u_dec = u4;
      4'd3, 4'd5, 4'd7: u_dec = odd8;
      4'd4:             u_dec = u2;
      4'd6:             u_dec = u34;
      default:          u_dec = u;
    endcase
  end

endmodule
