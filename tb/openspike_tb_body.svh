// Shared body of the end-to-end testbenches of the openspike core.
// The including module defines N, N_OUT, T_MAX, STEPS1 and STEPS2 as
// localparams and instantiates the core as `dut` after this include.
//
// The test programs random weights, input frames and decay codes through the
// host port, runs the network twice (the second run continues from the stored
// neuron state, init_state = 0) and compares every output-layer spike vector
// and, at the end, every stored membrane potential and inhibition bit with a
// behavioural model of the neuron equations:
//   u      = sat8(I + beta*u_prev)          I: sum of +-1 over spiking inputs
//   z      = u > uthr_h and not inhibited
//   inh    = z or not (u < uthr_l)
//   stored = z ? sat8(u - uthr_h) : u
// where the hidden and output layers see the spikes of the previous time step
// (none in the first step of a run). It also checks the cycle count of each
// run and counts how often each mechanism occurred.

  import snn_pkg::*;
  localparam int FANIN = 4, SEL = 16, BEATS = 8;
  localparam int CH = N / FANIN, G = N / SEL, G_OUT = (N_OUT + SEL - 1) / SEL;
  localparam int BW = N / BEATS;
  localparam int TW = $clog2(T_MAX) + 1;
  localparam int STEP_CYCLES = 3 + 2 * (CH + 1);
  localparam int L_WHID = N * FANIN / 32, L_WOUT = ((N_OUT * FANIN + 31) / 32), L_WIN = N / 32;
  localparam int L_INP = BW / 32, L_POT = SEL * 8 / 32, L_DEC = SEL * 4 / 32;
  // The inhibition bit is set whenever u >= uthr_l (or on a spike), so with
  // uthr_l below uthr_h a neuron is inhibited before it can cross uthr_h.
  // A low threshold above the high one gives a refractory behaviour instead.
  localparam int UH = 1, UL = 3;

  logic clk = 0, rst_n = 0, start = 0, init_state = 1;
  logic [TW-1:0] num_steps = '0;
  logic signed [7:0] uthr_h = 8'(UH), uthr_l = 8'(UL);
  logic busy, done, out_valid;
  logic [TW-1:0] out_step;
  logic [N_OUT-1:0] out_spikes;
  logic host_req = 0, host_we = 0;
  mem_e host_mem = MEM_WGT_HID;
  logic [15:0] host_addr = '0;
  logic [31:0] host_wdata = '0;
  logic host_rvalid;
  logic [31:0] host_rdata;

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  // ---------------------------------------------------------------- model
  bit whid [N][N];          // [neuron][input]
  bit wout [N_OUT][N];
  bit win  [N];
  bit inp  [T_MAX][N];
  int beta_m [3][N];
  int pot_m  [3][N];
  bit inh_m  [3][N];
  bit spk_prev [2][N];      // previous-step spikes of input and hidden layers
  bit out_exp [T_MAX][N_OUT];
  // mechanism counters
  int n_spk [3], n_inhibited, n_sat, n_inh_release, n_cache_loads, n_ignored, n_runs_cont, n_out_checked;

  function automatic int sat(int v);
    if (v > 127) begin n_sat++; return 127; end
    if (v < -128) begin n_sat++; return -128; end
    return v;
  endfunction
  function automatic int fdiv(int a, int d);
    int q = a / d;
    if ((a % d != 0) && (a < 0)) q -= 1;
    return q;
  endfunction
  function automatic int decay(int v, int c);
    int s = 0;
    if (c >= 8) return v;
    if (c[2]) s += fdiv(v, 2);
    if (c[1]) s += fdiv(v, 4);
    if (c[0]) s += fdiv(v, 8);
    return s;
  endfunction
  function automatic bit update(int l, int n, int cur);
    int u; bit z;
    u = sat(cur + decay(pot_m[l][n], beta_m[l][n]));
    z = (u > UH) && !inh_m[l][n];
    if ((u > UH) && inh_m[l][n]) n_inhibited++;
    if (inh_m[l][n] && !z && (u < UL)) n_inh_release++;
    inh_m[l][n] = z || !(u < UL);
    pot_m[l][n] = z ? sat(u - UH) : u;
    if (z) n_spk[l]++;
    return z;
  endfunction

  task automatic model_run(input int steps, input bit init);
    bit s_in [N], s_hid [N];
    if (init) foreach (pot_m[l, n]) begin pot_m[l][n] = 0; inh_m[l][n] = 0; end
    foreach (spk_prev[l, n]) spk_prev[l][n] = 0;
    for (int t = 0; t < steps; t++) begin
      for (int i = 0; i < N; i++) s_in[i] = update(0, i, inp[t][i] ? (win[i] ? 1 : -1) : 0);
      for (int j = 0; j < N; j++) begin
        int c = 0;
        for (int i = 0; i < N; i++) if (spk_prev[0][i]) c += whid[j][i] ? 1 : -1;
        s_hid[j] = update(1, j, c);
      end
      for (int o = 0; o < N_OUT; o++) begin
        int c = 0;
        for (int i = 0; i < N; i++) if (spk_prev[1][i]) c += wout[o][i] ? 1 : -1;
        out_exp[t][o] = update(2, o, c);
      end
      for (int i = 0; i < N; i++) begin spk_prev[0][i] = s_in[i]; spk_prev[1][i] = s_hid[i]; end
    end
  endtask

  // ----------------------------------------------------------------- host
  task automatic hwrite(input mem_e m, input int a, input logic [31:0] d);
    @(negedge clk);
    host_req = 1; host_we = 1; host_mem = m; host_addr = 16'(a); host_wdata = d;
    @(negedge clk);
    host_req = 0; host_we = 0;
  endtask
  task automatic hread(input mem_e m, input int a, output logic [31:0] d);
    @(negedge clk);
    host_req = 1; host_we = 0; host_mem = m; host_addr = 16'(a);
    @(negedge clk);
    host_req = 0;
    if (!host_rvalid) begin failures++; $display("host read not acknowledged"); end
    d = host_rdata;
  endtask

  function automatic int row_base(int l);
    return l * G;
  endfunction

  task automatic program_all(input int steps);
    logic [31:0] d;
    for (int c = 0; c < CH; c++)
      for (int ln = 0; ln < L_WHID; ln++) begin
        for (int b = 0; b < 32; b++) begin
          int bit_i = ln * 32 + b;
          d[b] = whid[bit_i / FANIN][c * FANIN + bit_i % FANIN];
        end
        hwrite(MEM_WGT_HID, c * L_WHID + ln, d);
      end
    for (int c = 0; c < CH; c++)
      for (int ln = 0; ln < L_WOUT; ln++) begin
        for (int b = 0; b < 32; b++) begin
          int bit_i = ln * 32 + b;
          d[b] = (bit_i / FANIN < N_OUT) ? wout[bit_i / FANIN][c * FANIN + bit_i % FANIN] : 1'b0;
        end
        hwrite(MEM_WGT_OUT, c * L_WOUT + ln, d);
      end
    for (int ln = 0; ln < L_WIN; ln++) begin
      for (int b = 0; b < 32; b++) d[b] = win[ln * 32 + b];
      hwrite(MEM_WGT_IN, ln, d);
    end
    for (int t = 0; t < steps; t++)
      for (int bt = 0; bt < BEATS; bt++)
        for (int ln = 0; ln < L_INP; ln++) begin
          for (int b = 0; b < 32; b++) d[b] = inp[t][bt * BW + ln * 32 + b];
          hwrite(MEM_INPUT, (t * BEATS + bt) * L_INP + ln, d);
        end
    for (int l = 0; l < 3; l++)
      for (int g = 0; g < ((l == 2) ? G_OUT : G); g++)
        for (int ln = 0; ln < L_DEC; ln++) begin
          for (int k = 0; k < 8; k++) begin
            int n = g * SEL + ln * 8 + k;
            d[k*4 +: 4] = (l == 2 && n >= N_OUT) ? 4'd0 : 4'(beta_m[l][n]);
          end
          hwrite(MEM_DECAY, (row_base(l) + g) * L_DEC + ln, d);
        end
  endtask

  // --------------------------------------------------------- DUT observers
  int got_out;
  bit out_seen [T_MAX];
  always @(posedge clk) if (rst_n && out_valid) begin
    got_out++;
    out_seen[out_step] = 1;
    for (int o = 0; o < N_OUT; o++) begin
      checks++;
      if (out_spikes[o] !== out_exp[out_step][o]) begin
        failures++;
        if (failures < 10) $display("step %0d output %0d: spike %0d expected %0d", out_step, o, out_spikes[o], out_exp[out_step][o]);
      end
    end
    n_out_checked++;
  end
  always @(posedge clk) if (rst_n && dut.cache_wb) n_cache_loads++;

  task automatic do_run(input int steps, input bit init);
    int cyc = 0;
    model_run(steps, init);
    got_out = 0;
    foreach (out_seen[t]) out_seen[t] = 0;
    @(negedge clk);
    init_state = init; num_steps = TW'(steps); start = 1;
    @(negedge clk);
    start = 0;
    // a host write while busy must be ignored
    host_req = 1; host_we = 1; host_mem = MEM_DECAY; host_addr = '0; host_wdata = 32'hFFFF_FFFF;
    @(negedge clk);
    host_req = 0; host_we = 0;
    n_ignored++;
    cyc = 2;
    while (!done) begin @(negedge clk); cyc++; end
    // start is taken on the first edge, then preload, the steps and the flush
    checks++;
    if (cyc != 1 + 9 + steps * STEP_CYCLES + 3) begin
      failures++; $display("run took %0d cycles, expected %0d", cyc, 1 + 9 + steps * STEP_CYCLES + 3);
    end
    @(negedge clk);   // the last output vector is sampled on the edge after done
    checks++;
    if (got_out != steps) begin failures++; $display("%0d output vectors for %0d steps", got_out, steps); end
    for (int t = 0; t < steps; t++) if (!out_seen[t]) begin failures++; $display("no output for step %0d", t); end
    if (!init) n_runs_cont++;
  endtask

  task automatic check_state();
    logic [31:0] d;
    for (int l = 0; l < 3; l++)
      for (int g = 0; g < ((l == 2) ? G_OUT : G); g++) begin
        for (int ln = 0; ln < L_POT; ln++) begin
          hread(MEM_POT, (row_base(l) + g) * L_POT + ln, d);
          for (int k = 0; k < 4; k++) begin
            int n = g * SEL + ln * 4 + k;
            if (l == 2 && n >= N_OUT) continue;
            checks++;
            if (int'($signed(d[k*8 +: 8])) != pot_m[l][n]) begin
              failures++;
              if (failures < 10) $display("layer %0d neuron %0d: potential %0d expected %0d", l, n, $signed(d[k*8 +: 8]), pot_m[l][n]);
            end
          end
        end
        hread(MEM_INH, row_base(l) + g, d);
        for (int k = 0; k < SEL; k++) begin
          int n = g * SEL + k;
          if (l == 2 && n >= N_OUT) continue;
          checks++;
          if (d[k] !== inh_m[l][n]) begin
            failures++;
            if (failures < 10) $display("layer %0d neuron %0d: inhibition %0d expected %0d", l, n, d[k], inh_m[l][n]);
          end
        end
      end
  endtask

  initial begin
    // random network; weights lean positive so that layers fire
    foreach (whid[j, i]) whid[j][i] = ($urandom % 100) < 60;
    foreach (wout[o, i]) wout[o][i] = ($urandom % 100) < 55;
    foreach (win[i])     win[i]     = ($urandom % 100) < 85;
    foreach (inp[t, i])  inp[t][i]  = ($urandom % 100) < 50;
    foreach (beta_m[l, n]) beta_m[l][n] = int'($urandom % 10);
    // two output neurons without leak and with one-signed weights drive
    // their potentials into saturation
    for (int i = 0; i < N; i++) begin wout[0][i] = 1'b1; wout[1][i] = 1'b0; end
    beta_m[2][0] = 8; beta_m[2][1] = 8;
    repeat (3) @(posedge clk);
    rst_n = 1;
    program_all(STEPS1 > STEPS2 ? STEPS1 : STEPS2);
    do_run(STEPS1, 1'b1);
    do_run(STEPS2, 1'b0);
    check_state();
    // every mechanism must have happened
    begin
      string names [9] = '{"input-layer spikes", "hidden-layer spikes", "output-layer spikes",
                            "spike blocked by inhibition", "inhibition released", "potential saturation",
                            "cache loads", "host write ignored while busy", "run continuing stored state"};
      int counts [9];
      counts = '{n_spk[0], n_spk[1], n_spk[2], n_inhibited, n_inh_release, n_sat,
                 n_cache_loads, n_ignored, n_runs_cont};
      for (int k = 0; k < 9; k++) begin
        $display("mechanism %-32s %0d", names[k], counts[k]);
        checks++;
        if (counts[k] == 0) begin failures++; $display("FAIL: mechanism never happened: %s", names[k]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
