// tb_memory_controller: checks the address, mask and data decoding of the
// memory controller at a reduced size (256 neurons, 8 stored frames):
// host writes and reads of every bank while idle, host requests ignored while
// busy, weight and spike addressing of the MAC path with the chunk-to-spike
// selection and the empty first step, row addressing and data packing of the
// neuron-selector path with the first-visit zeroing, and the cache address.
module tb_memory_controller;
  import snn_pkg::*;
  localparam int N = 256, N_OUT = 10, FANIN = 4, SEL = 16, BEATS = 8, T_MAX = 8;
  localparam int CH = N / FANIN, G = N / SEL, ROWS = 64, WOUT_W = 64, BW = N / BEATS;
  localparam int CW = 6, GW = 4, RW = 6, IW = 6, TW = 4;

  logic clk = 0, rst_n = 0, busy = 0, init_state = 0;
  logic [TW-1:0] step = '0;
  logic mac_issue = 0; layer_e mac_layer = LAYER_IN; logic [CW-1:0] mac_chunk = '0, mac_vchunk = '0;
  logic [FANIN-1:0] mac_spikes;
  logic sel_issue = 0; layer_e sel_layer = LAYER_IN; logic [GW-1:0] sel_group = '0;
  logic sel_wb = 0; layer_e sel_wlayer = LAYER_IN; logic [GW-1:0] sel_wgroup = '0;
  logic sel_wparity = 0, sel_wfresh = 0;
  logic signed [7:0] u_old [SEL], u_save [SEL];
  logic [3:0] beta [SEL];
  logic [SEL-1:0] inh_old, z = '0, inh_new = '0;
  logic cache_issue = 0; logic [2:0] cache_beat = '0; logic [TW-1:0] cache_step = '0;
  logic host_req = 0, host_we = 0; mem_e host_mem = MEM_WGT_HID; logic [15:0] host_addr = '0;
  logic [31:0] host_wdata = '0, host_rdata; logic host_rvalid;
  logic whid_we, whid_re; logic [CW-1:0] whid_waddr, whid_raddr; logic [N*FANIN/32-1:0] whid_wmask;
  logic [N*FANIN-1:0] whid_wdata, whid_rdata;
  logic wout_we, wout_re; logic [CW-1:0] wout_waddr, wout_raddr; logic [1:0] wout_wmask;
  logic [WOUT_W-1:0] wout_wdata, wout_rdata;
  logic win_we, win_re; logic [N/32-1:0] win_wmask; logic [N-1:0] win_wdata, win_rdata;
  logic inp_we, inp_re; logic [IW-1:0] inp_waddr, inp_raddr; logic [BW/32-1:0] inp_wmask;
  logic [BW-1:0] inp_wdata, inp_rdata;
  logic pot_we, pot_re; logic [RW-1:0] pot_waddr, pot_raddr; logic [3:0] pot_wmask;
  logic [127:0] pot_wdata, pot_rdata;
  logic dec_we, dec_re; logic [RW-1:0] dec_waddr, dec_raddr; logic [1:0] dec_wmask;
  logic [63:0] dec_wdata, dec_rdata;
  logic spk_we, spk_re; logic [RW:0] spk_waddr, spk_raddr; logic [SEL-1:0] spk_wdata, spk_rdata;
  logic inh_we, inh_re; logic [RW-1:0] inh_waddr, inh_raddr; logic [SEL-1:0] inh_wdata, inh_rdata;
  int checks = 0, failures = 0;

  memory_controller #(.N(N), .N_OUT(N_OUT), .FANIN(FANIN), .SEL(SEL), .BEATS(BEATS), .T_MAX(T_MAX)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic int n_we();
    return int'(whid_we) + int'(wout_we) + int'(win_we) + int'(inp_we) + int'(pot_we) +
           int'(dec_we) + int'(spk_we) + int'(inh_we);
  endfunction

  initial begin
    foreach (u_save[j]) u_save[j] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ------------------------------------------------ host writes while idle
    for (int n = 0; n < 400; n++) begin
      int a;
      @(negedge clk);
      host_mem = mem_e'($urandom % 8);
      a = int'($urandom % 128);
      host_addr = 16'(a); host_wdata = $urandom; host_req = 1; host_we = 1;
      #1;
      check(n_we() == 1, "exactly one bank written");
      unique case (host_mem)
        MEM_WGT_HID: check(whid_we && whid_waddr == CW'(a / 32) && whid_wmask == (32'b1 << (a % 32)) &&
                           whid_wdata[(a % 32) * 32 +: 32] == host_wdata, "hidden weight write");
        MEM_WGT_OUT: check(wout_we && wout_waddr == CW'(a / 2) && wout_wmask == 2'(1 << (a % 2)) &&
                           wout_wdata[(a % 2) * 32 +: 32] == host_wdata, "output weight write");
        MEM_WGT_IN:  check(win_we && win_wmask == 8'(1 << (a % 8)) && win_wdata[(a % 8) * 32 +: 32] == host_wdata,
                           "input weight write");
        MEM_INPUT:   check(inp_we && inp_waddr == IW'(a) && inp_wdata == host_wdata, "input data write");
        MEM_POT:     check(pot_we && pot_waddr == RW'(a / 4) && pot_wmask == 4'(1 << (a % 4)) &&
                           pot_wdata[(a % 4) * 32 +: 32] == host_wdata, "potential write");
        MEM_DECAY:   check(dec_we && dec_waddr == RW'(a / 2) && dec_wmask == 2'(1 << (a % 2)) &&
                           dec_wdata[(a % 2) * 32 +: 32] == host_wdata, "decay write");
        MEM_SPIKE:   check(spk_we && spk_waddr == 7'(a) && spk_wdata == host_wdata[15:0], "spike write");
        MEM_INH:     check(inh_we && inh_waddr == RW'(a) && inh_wdata == host_wdata[15:0], "inhibition write");
        default: ;
      endcase
    end
    // ------------------------------------------------- host reads while idle
    for (int n = 0; n < 200; n++) begin
      int a; logic [31:0] e;
      @(negedge clk);
      host_mem = mem_e'($urandom % 8); a = int'($urandom % 128);
      host_addr = 16'(a); host_req = 1; host_we = 0;
      #1;
      check(n_we() == 0, "no write on a read");
      unique case (host_mem)
        MEM_WGT_HID: check(whid_re && whid_raddr == CW'(a / 32), "hidden weight read address");
        MEM_POT:     check(pot_re && pot_raddr == RW'(a / 4), "potential read address");
        MEM_SPIKE:   check(spk_re && spk_raddr == 7'(a), "spike read address");
        default: ;
      endcase
      @(negedge clk);
      host_req = 0;
      for (int k = 0; k < N * FANIN / 32; k++) whid_rdata[k*32 +: 32] = $urandom;
      wout_rdata = {$urandom, $urandom};
      for (int k = 0; k < N / 32; k++) win_rdata[k*32 +: 32] = $urandom;
      inp_rdata = $urandom; pot_rdata = {$urandom, $urandom, $urandom, $urandom};
      dec_rdata = {$urandom, $urandom}; spk_rdata = 16'($urandom); inh_rdata = 16'($urandom);
      #1;
      unique case (host_mem)
        MEM_WGT_HID: e = whid_rdata[(a % 32) * 32 +: 32];
        MEM_WGT_OUT: e = wout_rdata[(a % 2) * 32 +: 32];
        MEM_WGT_IN:  e = win_rdata[(a % 8) * 32 +: 32];
        MEM_INPUT:   e = inp_rdata;
        MEM_POT:     e = pot_rdata[(a % 4) * 32 +: 32];
        MEM_DECAY:   e = dec_rdata[(a % 2) * 32 +: 32];
        MEM_SPIKE:   e = {16'd0, spk_rdata};
        default:     e = {16'd0, inh_rdata};
      endcase
      check(host_rvalid && host_rdata == e, $sformatf("host read data bank %0d", host_mem));
    end
    // ------------------------------------------------------------ busy: host ignored
    @(negedge clk);
    busy = 1; host_req = 1; host_we = 1; host_mem = MEM_POT;
    #1;
    check(!pot_we, "host write ignored while busy");
    host_we = 0;
    @(negedge clk);
    check(!host_rvalid, "host read ignored while busy");
    host_req = 0;
    // ------------------------------------------------------------ MAC path
    for (int n = 0; n < 300; n++) begin
      int c, l, s;
      @(negedge clk);
      c = int'($urandom % CH); l = int'($urandom % 3); s = int'($urandom % 8);
      step = TW'(s); mac_issue = 1; mac_layer = layer_e'(l); mac_chunk = CW'(c);
      #1;
      check(whid_re == (l == 1) && wout_re == (l == 2) && win_re == (l == 0), "weight bank select");
      if (l == 1) check(whid_raddr == CW'(c), "hidden weight row");
      if (l == 2) check(wout_raddr == CW'(c), "output weight row");
      if (l != 0) check(spk_re && spk_raddr == {~step[0], RW'(((l == 2) ? G : 0) + c / 4)},
                        $sformatf("spike row layer %0d chunk %0d", l, c));
      spk_rdata = 16'($urandom); mac_vchunk = CW'(c);
      #1;
      check(mac_spikes == ((s == 0) ? 4'd0 : spk_rdata[(c % 4) * 4 +: 4]), "chunk spikes");
    end
    mac_issue = 0;
    // ------------------------------------------------------------ selector path
    for (int n = 0; n < 300; n++) begin
      int g, l, gw, lw;
      @(negedge clk);
      g = int'($urandom % G); l = int'($urandom % 3); gw = int'($urandom % G); lw = int'($urandom % 3);
      sel_issue = 1; sel_layer = layer_e'(l); sel_group = GW'(g);
      sel_wb = 1; sel_wlayer = layer_e'(lw); sel_wgroup = GW'(gw);
      sel_wparity = $urandom; sel_wfresh = $urandom; init_state = $urandom;
      foreach (u_save[j]) u_save[j] = 8'($urandom);
      z = 16'($urandom); inh_new = 16'($urandom);
      pot_rdata = {$urandom, $urandom, $urandom, $urandom}; dec_rdata = {$urandom, $urandom};
      inh_rdata = 16'($urandom);
      #1;
      check(pot_re && dec_re && inh_re && pot_raddr == RW'(l * G + g) && dec_raddr == RW'(l * G + g) &&
            inh_raddr == RW'(l * G + g), "selector read row");
      check(pot_we && pot_waddr == RW'(lw * G + gw) && pot_wmask == '1 && inh_we && inh_waddr == RW'(lw * G + gw) &&
            spk_we && spk_waddr == {sel_wparity, RW'(lw * G + gw)} && !dec_we, "selector write row");
      check(spk_wdata == z && inh_wdata == inh_new, "spike and inhibition data");
      for (int j = 0; j < SEL; j++) begin
        check(pot_wdata[j*8 +: 8] == u_save[j], "potential packing");
        check(u_old[j] == ((sel_wfresh && init_state) ? 8'sd0 : $signed(pot_rdata[j*8 +: 8])), "potential unpacking");
        check(beta[j] == dec_rdata[j*4 +: 4], "decay unpacking");
      end
      check(inh_old == ((sel_wfresh && init_state) ? 16'd0 : inh_rdata), "inhibition unpacking");
    end
    sel_issue = 0; sel_wb = 0;
    // ------------------------------------------------------------ cache path
    for (int n = 0; n < 50; n++) begin
      @(negedge clk);
      cache_issue = 1; cache_step = TW'($urandom % T_MAX); cache_beat = 3'($urandom);
      #1;
      check(inp_re && inp_raddr == IW'(int'(cache_step) * 8 + int'(cache_beat)), "input frame address");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
