// tb_neuron_selector: for every group, random decayed potentials must reach
// exactly the 16 neurons of that group (all others see zero) and the sums of
// exactly those neurons must come back, in lane order.
module tb_neuron_selector;
  localparam int N = 1024, SEL = 16;
  logic [5:0] group;
  logic signed [7:0] dec_in [SEL], dec_out [N], sum_in [N], sel_sum [SEL];
  int checks = 0, failures = 0;

  neuron_selector #(.N(N), .SEL(SEL)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 3; rep++) begin
      for (int g = 0; g < N / SEL; g++) begin
        int bad = 0;
        group = 6'(g);
        for (int j = 0; j < SEL; j++) dec_in[j] = 8'($urandom | 1);
        for (int i = 0; i < N; i++) sum_in[i] = 8'($urandom);
        #1;
        for (int i = 0; i < N; i++) begin
          logic signed [7:0] e;
          e = (i >= g * SEL && i < g * SEL + SEL) ? dec_in[i - g * SEL] : 8'sd0;
          if (dec_out[i] !== e) bad++;
        end
        checks++;
        if (bad != 0) begin failures++; if (failures < 10) $display("group %0d: %0d wrong routes", g, bad); end
        for (int j = 0; j < SEL; j++) begin
          checks++;
          if (sel_sum[j] !== sum_in[g * SEL + j]) begin
            failures++;
            if (failures < 10) $display("group %0d lane %0d sum wrong", g, j);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
