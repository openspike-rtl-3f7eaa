// tb_openspike: end-to-end test of the accelerator core at a reduced size
// (256 neurons, 10 outputs, 8 stored input frames) so that it runs in seconds.
// See openspike_tb_body.svh for what is checked.
module tb_openspike;
  localparam int N = 256, N_OUT = 10, T_MAX = 8, STEPS1 = 5, STEPS2 = 3;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  `include "openspike_tb_body.svh"

  openspike #(.N(N), .N_OUT(N_OUT), .T_MAX(T_MAX)) dut (.*);
endmodule
