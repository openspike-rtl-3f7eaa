// tb_mau: random potentials, decay codes, spikes and thresholds on all 16
// lanes. Checks the decayed potentials (beta = code/8 by truncating shifts) and
// the reset-by-subtraction of the lanes that spiked, with saturation.
module tb_mau;
  localparam int SEL = 16;
  logic signed [7:0] u_old [SEL], u_dec [SEL], u_new [SEL], u_save [SEL];
  logic [3:0] beta [SEL];
  logic [SEL-1:0] z;
  logic signed [7:0] uthr_h;
  int checks = 0, failures = 0;

  mau #(.SEL(SEL), .RESET_SUB(1'b1)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int fdiv(int a, int d);
    int q = a / d;
    if ((a % d != 0) && (a < 0)) q -= 1;
    return q;
  endfunction
  function automatic int exp_dec(int v, int c);
    int s = 0;
    if (c >= 8) return v;
    if (c[2]) s += fdiv(v, 2);
    if (c[1]) s += fdiv(v, 4);
    if (c[0]) s += fdiv(v, 8);
    return s;
  endfunction
  function automatic int sat(int v);
    return v > 127 ? 127 : (v < -128 ? -128 : v);
  endfunction

  initial begin
    for (int n = 0; n < 3000; n++) begin
      for (int j = 0; j < SEL; j++) begin
        u_old[j] = 8'($urandom); u_new[j] = 8'($urandom); beta[j] = 4'($urandom);
      end
      z = 16'($urandom);
      uthr_h = 8'($urandom);
      #1;
      for (int j = 0; j < SEL; j++) begin
        int es;
        checks++;
        if (int'(u_dec[j]) != exp_dec(int'(u_old[j]), int'(beta[j]))) begin
          failures++;
          if (failures < 10) $display("lane %0d decay u=%0d b=%0d got %0d", j, u_old[j], beta[j], u_dec[j]);
        end
        es = z[j] ? sat(int'(u_new[j]) - int'(uthr_h)) : int'(u_new[j]);
        checks++;
        if (int'(u_save[j]) != es) begin
          failures++;
          if (failures < 10) $display("lane %0d reset u=%0d z=%0d h=%0d got %0d exp %0d", j, u_new[j], z[j], uthr_h, u_save[j], es);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
