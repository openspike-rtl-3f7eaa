// tb_control_unit: runs the sequencer for 1 and 3 time steps at the default
// sizes and counts, per state, its length in cycles and the MAC, selector and
// cache issues. Expected for N = 1024: input state 3 cycles, hidden and output
// states 257 cycles each with 256 MAC issues and 64 selector issues, 8 cache
// beats per refill, 9 preload and 3 flush cycles. Also checks the one-cycle
// delay of the pipelines, the spike parity and the first-visit flag.
module tb_control_unit;
  import snn_pkg::*;
  localparam int N = 1024, CH = 256, G = 64;
  logic clk = 0, rst_n = 0, start = 0;
  logic [7:0] num_steps = '0;
  logic busy, done, transfer, mac_issue, mac_valid, mac_first;
  state_e state;
  logic [7:0] step, cache_step;
  layer_e mac_layer, mac_vlayer, sel_layer, sel_wlayer;
  logic [7:0] mac_chunk, mac_vchunk;
  logic sel_issue, sel_wb, sel_wparity, sel_wfresh, cache_issue, cache_wb;
  logic [5:0] sel_group, sel_wgroup;
  logic [2:0] cache_beat, cache_wbeat;
  int checks = 0, failures = 0;

  control_unit #(.N(N), .N_OUT(10), .FANIN(4), .SEL(16), .BEATS(8), .T_MAX(128)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // per-state counters, indexed by state
  int len [8], macs [8], sels [8], caches [8], xfers [8];
  int busy_cycles;
  logic prev_mac_issue, prev_sel_issue; logic [7:0] prev_chunk; logic [5:0] prev_group;

  always @(posedge clk) if (rst_n) begin
    if (busy) busy_cycles++;
    len[state]++;
    if (mac_issue)   macs[state]++;
    if (sel_issue)   sels[state]++;
    if (cache_issue) caches[state]++;
    if (transfer)    xfers[state]++;
    // pipelines: one-cycle delay
    if (mac_valid !== prev_mac_issue || (mac_valid && mac_vchunk !== prev_chunk)) begin
      failures++; $display("MAC pipeline mismatch");
    end
    if (sel_wb !== prev_sel_issue || (sel_wb && sel_wgroup !== prev_group)) begin
      failures++; $display("selector pipeline mismatch");
    end
    if (mac_issue && sel_issue && mac_layer == sel_layer) begin failures++; $display("layer clash"); end
    prev_mac_issue <= mac_issue; prev_chunk <= mac_chunk;
    prev_sel_issue <= sel_issue; prev_group <= sel_group;
  end

  task automatic run(input int steps);
    int t0, t1;
    foreach (len[s]) begin len[s] = 0; macs[s] = 0; sels[s] = 0; caches[s] = 0; xfers[s] = 0; end
    busy_cycles = 0;
    @(negedge clk); num_steps = 8'(steps); start = 1;
    @(negedge clk); start = 0;
    t0 = 0;
    while (!done) begin @(negedge clk); t0++; end
    check(busy_cycles == 9 + steps * 517 + 3, $sformatf("busy cycles %0d", busy_cycles));
    check(len[ST_PRELOAD] == 9, $sformatf("preload %0d", len[ST_PRELOAD]));
    check(len[ST_IN] == 3 * steps, $sformatf("input state %0d", len[ST_IN]));
    check(len[ST_HID] == 257 * steps, $sformatf("hidden state %0d", len[ST_HID]));
    check(len[ST_OUT] == 257 * steps, $sformatf("output state %0d", len[ST_OUT]));
    check(len[ST_FLUSH] == 3, $sformatf("flush %0d", len[ST_FLUSH]));
    check(macs[ST_IN] == steps && macs[ST_HID] == CH * steps && macs[ST_OUT] == CH * steps, "MAC issues");
    check(sels[ST_IN] == steps - 1 && sels[ST_HID] == G * steps && sels[ST_OUT] == G * steps && sels[ST_FLUSH] == 1,
          $sformatf("selector issues %0d %0d %0d %0d", sels[ST_IN], sels[ST_HID], sels[ST_OUT], sels[ST_FLUSH]));
    check(caches[ST_PRELOAD] == 8 && caches[ST_OUT] == 8 * (steps - 1), "cache beats");
    check(xfers[ST_IN] == steps && xfers[ST_HID] == steps && xfers[ST_OUT] == steps && xfers[ST_FLUSH] == 1, "transfers");
    @(negedge clk);
    check(!busy, "idle after done");
  endtask

  // parity and first-visit flags at write-back
  always @(posedge clk) if (rst_n && sel_wb) begin
    bit ep, ef;
    if (sel_wlayer == LAYER_OUT) begin ep = ~step[0]; ef = (step == 1); end
    else begin ep = step[0]; ef = (step == 0); end
    checks++;
    if (sel_wparity !== ep || sel_wfresh !== ef) begin
      failures++; $display("parity/fresh wrong at step %0d layer %0d", step, sel_wlayer);
    end
  end

  initial begin
    prev_mac_issue = 0; prev_sel_issue = 0; prev_chunk = 0; prev_group = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(!busy && state == ST_IDLE, "idle after reset");
    run(1);
    run(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
