// tb_potential_decay: every 8-bit potential with every decay code. The
// expected value is beta*u with beta = code/8 (code > 8 keeps u), formed as a
// sum of floor(u/2^k) terms, i.e. the truncating shifts of the datapath.
module tb_potential_decay;
  logic signed [7:0] u, u_dec;
  logic [3:0] beta;
  int checks = 0, failures = 0;

  potential_decay dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int fdiv(int a, int d);   // floor division
    int q = a / d;
    if ((a % d != 0) && (a < 0)) q -= 1;
    return q;
  endfunction

  function automatic int expect_dec(int v, int code);
    case (code)
      0: return 0;
      1: return fdiv(v, 8);
      2: return fdiv(v, 4);
      3: return fdiv(v, 4) + fdiv(v, 8);
      4: return fdiv(v, 2);
      5: return fdiv(v, 2) + fdiv(v, 8);
      6: return fdiv(v, 2) + fdiv(v, 4);
      7: return fdiv(v, 2) + fdiv(v, 4) + fdiv(v, 8);
      default: return v;
    endcase
  endfunction

  initial begin
    for (int c = 0; c < 16; c++) begin
      for (int v = -128; v < 128; v++) begin
        u = 8'(v); beta = 4'(c);
        #1;
        checks++;
        if (int'(u_dec) != expect_dec(v, c)) begin
          failures++;
          if (failures < 10) $display("u=%0d code=%0d: got %0d expected %0d", v, c, u_dec, expect_dec(v, c));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
