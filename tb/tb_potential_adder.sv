// tb_potential_adder: loads random MAC results, routes random decayed
// potentials in and checks the saturated 8-bit sum; also checks that the held
// value does not change without load.
module tb_potential_adder;
  logic clk = 0, rst_n = 0, load = 0;
  logic signed [11:0] mac_in = '0;
  logic signed [7:0]  dec_in = '0, sum;
  int checks = 0, failures = 0;
  int held = 0;

  potential_adder #(.ACC_W(12)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(int v);
    return v > 127 ? 127 : (v < -128 ? -128 : v);
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      load   = ($urandom % 3) == 0;
      mac_in = 12'(int'($urandom % 401) - 200);
      if (n % 5 == 0) mac_in = 12'(int'($urandom % 2049) - 1024);
      if (load) held = int'(mac_in);
      @(negedge clk);
      load = 0;
      for (int k = 0; k < 3; k++) begin
        dec_in = 8'($urandom);
        #1;
        checks++;
        if (int'(sum) != sat(held + int'(dec_in))) begin
          failures++;
          if (failures < 10) $display("held %0d dec %0d: sum %0d", held, dec_in, sum);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
