// tb_schmitt_trigger: every potential against a set of threshold pairs, with
// and without inhibition, compared with the neuron equations: a spike needs
// u > uthr_h and no inhibition; inhibition clears only when there is no spike
// and u < uthr_l.
module tb_schmitt_trigger;
  logic signed [7:0] u, uthr_h, uthr_l;
  logic inh_old, z, inh_new;
  int checks = 0, failures = 0;

  schmitt_trigger dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int th[6] = '{10, 0, 40, -5, 100, 3};
    automatic int tl[6] = '{-10, 0, 20, -20, -50, 3};
    for (int p = 0; p < 6; p++) begin
      for (int v = -128; v < 128; v++) begin
        for (int i = 0; i < 2; i++) begin
          bit ez, ei;
          u = 8'(v); uthr_h = 8'(th[p]); uthr_l = 8'(tl[p]); inh_old = i[0];
          #1;
          ez = (v > th[p]) && (i == 0);
          ei = !(!ez && (v < tl[p]));
          checks++;
          if (z !== ez || inh_new !== ei) begin
            failures++;
            if (failures < 10) $display("u=%0d h=%0d l=%0d inh=%0d: z=%0d inh_new=%0d", v, th[p], tl[p], i, z, inh_new);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
