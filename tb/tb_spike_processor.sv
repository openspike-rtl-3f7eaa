// tb_spike_processor: fills the 1024-bit input spike cache in 8 beats in a
// random order and checks its content, then drives the 16 Schmitt-trigger lanes
// with random potentials and inhibition bits and checks spikes and new
// inhibition bits against the neuron equations.
module tb_spike_processor;
  localparam int N = 1024, SEL = 16, BEATS = 8, BW = N / BEATS;
  logic clk = 0, rst_n = 0, load = 0;
  logic [2:0] beat = '0;
  logic [BW-1:0] load_data = '0;
  logic [N-1:0] cache;
  logic signed [7:0] u [SEL];
  logic [SEL-1:0] inh_old, z, inh_new;
  logic signed [7:0] uthr_h, uthr_l;
  logic [N-1:0] expected;
  int checks = 0, failures = 0;

  spike_processor #(.N(N), .SEL(SEL), .BEATS(BEATS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (cache !== '0) failures++;
    expected = '0;
    for (int rep = 0; rep < 20; rep++) begin
      for (int b0 = 0; b0 < BEATS; b0++) begin
        int b = (b0 * 3 + rep) % BEATS;
        load = 1; beat = 3'(b);
        for (int k = 0; k < BW / 32; k++) load_data[k*32 +: 32] = $urandom;
        expected[b*BW +: BW] = load_data;
        @(negedge clk);
        load = 0;
        if ($urandom % 2) begin load_data = '1; @(negedge clk); end   // idle beat must not load
        checks++;
        if (cache !== expected) begin failures++; if (failures < 10) $display("cache mismatch rep %0d beat %0d", rep, b); end
      end
    end
    for (int n = 0; n < 2000; n++) begin
      uthr_h = 8'(int'($urandom % 60));
      uthr_l = 8'(-int'($urandom % 60));
      inh_old = 16'($urandom);
      for (int j = 0; j < SEL; j++) u[j] = 8'($urandom);
      #1;
      for (int j = 0; j < SEL; j++) begin
        bit ez, ei;
        ez = (u[j] > uthr_h) && !inh_old[j];
        ei = ez || !(u[j] < uthr_l);
        checks++;
        if (z[j] !== ez || inh_new[j] !== ei) begin failures++; if (failures < 10) $display("lane %0d wrong", j); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
