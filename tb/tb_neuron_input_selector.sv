// tb_neuron_input_selector: random caches, spikes and weight rows for each layer;
// checks per neuron the spike lanes, weight lanes and enable against the
// routing rules of the three layers, and that nothing is enabled when invalid.
module tb_neuron_input_selector;
  import snn_pkg::*;
  localparam int N = 1024, N_OUT = 10, FANIN = 4, WOUT_W = 64;
  logic valid;
  layer_e layer;
  logic [FANIN-1:0] spikes;
  logic [N-1:0] cache, w_in;
  logic [N*FANIN-1:0] w_hid;
  logic [WOUT_W-1:0] w_out;
  logic [FANIN-1:0] x [N], w [N];
  logic [N-1:0] en;
  int checks = 0, failures = 0;

  neuron_input_selector #(.N(N), .N_OUT(N_OUT), .FANIN(FANIN), .WOUT_W(WOUT_W)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 40; rep++) begin
      for (int l = 0; l < 3; l++) begin
        int bad = 0;
        valid = (rep % 5) != 4;
        layer = layer_e'(l);
        spikes = 4'($urandom);
        for (int k = 0; k < N / 32; k++) begin cache[k*32 +: 32] = $urandom; w_in[k*32 +: 32] = $urandom; end
        for (int k = 0; k < N * FANIN / 32; k++) w_hid[k*32 +: 32] = $urandom;
        w_out = {$urandom, $urandom};
        #1;
        for (int i = 0; i < N; i++) begin
          logic [3:0] ex, ew; logic ee;
          ex = '0; ew = '0; ee = 0;
          if (l == 0) begin ex[0] = cache[i]; ew[0] = w_in[i]; ee = valid; end
          else if (l == 1) begin ex = spikes; ew = w_hid[4*i +: 4]; ee = valid; end
          else if (i < N_OUT) begin ex = spikes; ew = w_out[4*i +: 4]; ee = valid; end
          if (en[i] !== ee) bad++;
          if (ee && (x[i] !== ex || w[i] !== ew)) bad++;
        end
        checks++;
        if (bad != 0) begin failures++; if (failures < 10) $display("layer %0d rep %0d: %0d errors", l, rep, bad); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
