// tb_mac_unit: random spikes and weights into one MAC unit, compared every cycle
// with a behavioural running sum (+1 for a spike on weight 1, -1 for a spike on
// weight 0), including clear with and without enable.
module tb_mac_unit;
  logic clk = 0, rst_n = 0, en = 0, clear = 0;
  logic [3:0] x = '0, w = '0;
  logic signed [11:0] acc;
  int checks = 0, failures = 0;
  int model = 0;

  mac_unit #(.FANIN(4), .ACC_W(12)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int psum(logic [3:0] xx, logic [3:0] ww);
    int s = 0;
    for (int k = 0; k < 4; k++) if (xx[k]) s += ww[k] ? 1 : -1;
    return s;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (acc !== 0) begin failures++; $display("reset value %0d", acc); end
    for (int n = 0; n < 3000; n++) begin
      en    = ($urandom % 4) != 0;
      clear = ($urandom % 50) == 0;
      x = 4'($urandom); w = 4'($urandom);
      if (n % 700 == 0) begin x = 4'hF; w = 4'hF; en = 1; clear = 0; end
      if (clear) model = en ? psum(x, w) : 0;
      else if (en) model += psum(x, w);
      @(negedge clk);
      checks++;
      if (acc != 12'(model)) begin
        failures++;
        if (failures < 10) $display("cycle %0d: acc=%0d expected %0d", n, acc, model);
      end
    end
    // long all-positive run reaching beyond 8 bits
    clear = 1; en = 1; x = 4'hF; w = 4'hF; model = 4;
    @(negedge clk); clear = 0;
    for (int n = 0; n < 255; n++) begin model += 4; @(negedge clk); end
    checks++; if (acc != 12'(model) || model != 1024) begin failures++; $display("full sum %0d/%0d", acc, model); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
