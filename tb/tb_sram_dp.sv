// tb_sram_dp: random masked writes and reads on a 64-bit x 64-word bank with
// 16-bit lanes, compared with a shadow copy; checks the one-cycle read latency
// and that rdata holds while re is low.
module tb_sram_dp;
  localparam int W = 64, D = 64, LANE = 16, NL = W / LANE;
  logic clk = 0, we = 0, re = 0;
  logic [5:0] waddr = '0, raddr = '0;
  logic [NL-1:0] wmask = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] shadow [D];
  int checks = 0, failures = 0;

  sram_dp #(.W(W), .D(D), .LANE(LANE)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every word
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = 6'(a); wmask = '1; wdata = {$urandom, $urandom};
      shadow[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 5000; n++) begin
      logic [W-1:0] exp_r;
      @(negedge clk);
      we = $urandom % 2; waddr = 6'($urandom); wmask = 4'($urandom); wdata = {$urandom, $urandom};
      re = 1; raddr = 6'($urandom);
      exp_r = shadow[raddr];   // read-before-write on the same address
      if (we) for (int l = 0; l < NL; l++) if (wmask[l]) shadow[waddr][l*LANE +: LANE] = wdata[l*LANE +: LANE];
      @(negedge clk);
      we = 0; re = 0;
      checks++;
      if (rdata !== exp_r) begin failures++; if (failures < 10) $display("read %0d: %h expected %h", raddr, rdata, exp_r); end
      raddr = 6'($urandom);
      @(negedge clk);
      checks++;
      if (rdata !== exp_r) begin failures++; if (failures < 10) $display("rdata did not hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
