// tb_openspike_full: end-to-end test of the accelerator core at its default
// size (1024 neurons, 10 outputs, 128 stored input frames): random network of
// 1,059,840 binary weights, two runs of six and four time steps.
// See openspike_tb_body.svh for what is checked.
module tb_openspike_full;
  localparam int N = 1024, N_OUT = 10, T_MAX = 128, STEPS1 = 6, STEPS2 = 4;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  `include "openspike_tb_body.svh"

  openspike dut (.*);
endmodule
