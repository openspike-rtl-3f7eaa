// memory_controller: connects the SRAM banks to the core and to the host.
//
// While the core is busy it turns the control unit's pipeline indices into bank
// addresses:
//  * MAC path: weight row `mac_chunk` of the layer being accumulated (the input
//    layer uses the single row of input-layer weights) and the row of stored
//    spikes of the previous layer holding chunk `mac_chunk`. One spike row holds
//    SEL spikes; one cycle later the FANIN spikes of the chunk are picked out
//    and broadcast to all MACs ("addressing spikes to all fan-out weights").
//    Spikes are read from the other time-step parity, i.e. the previous step;
//    in step 0 there is no previous step and they read as zero.
//  * Neuron-selector path: row `base(layer) + group` of the membrane,
//    decay-rate and inhibition banks is read, and one cycle later the new
//    potentials, inhibition bits and spikes are written back to the same row
//    (spikes to the row of the current parity). With init_state set, a layer's
//    first visit in a run reads potentials and inhibition bits as zero.
//  * Cache path: row `cache_step*BEATS + cache_beat` of the input data bank.
// Row layout of the per-neuron banks: input layer rows 0..G-1, hidden layer rows
// G..2G-1, output layer from row 2G; the spike bank repeats this for each
// parity (parity p at rows p*ROWS..).
// While the core is idle the host owns every bank: a request with host_we
// writes host_wdata into 32-bit word host_addr of bank host_mem (16-bit banks
// take the low half), a request without reads it; host_rvalid and host_rdata
// follow one cycle later. Requests made while busy are ignored.
// Most output bits are data routed straight from an input (host write data
// fanned out to every bank lane, write-back data passed to the banks, bank
// read data passed to the core); the logic here is the address and enable
// selection around them.
// Interfacing all SRAMs to the core and addressing spikes to the fan-out
// weights are the paper's functions for this block; the bank organisation, the
// parity scheme and the host port are this design's choices.
module memory_controller
  import snn_pkg::*;
#(
  parameter int unsigned N      = 1024,
  parameter int unsigned N_OUT  = 10,
  parameter int unsigned FANIN  = 4,
  parameter int unsigned SEL    = 16,
  parameter int unsigned BEATS  = 8,
  parameter int unsigned T_MAX  = 128,
  localparam int unsigned CH    = N / FANIN,
  localparam int unsigned G     = N / SEL,
  localparam int unsigned G_OUT = (N_OUT + SEL - 1) / SEL,
  localparam int unsigned ROWS  = 2 ** $clog2(2 * G + G_OUT),
  localparam int unsigned WOUT_W = ((N_OUT * FANIN + 31) / 32) * 32,
  localparam int unsigned CW    = $clog2(CH),
  localparam int unsigned GW    = $clog2(G),
  localparam int unsigned RW    = $clog2(ROWS),
  localparam int unsigned BIW   = (BEATS > 1) ? $clog2(BEATS) : 1,
  localparam int unsigned TW    = $clog2(T_MAX) + 1,
  localparam int unsigned IW    = $clog2(T_MAX * BEATS),
  localparam int unsigned BW    = N / BEATS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    busy,
  input  logic [TW-1:0]           step,
  input  logic                    init_state,
  // MAC path
  input  logic                    mac_issue,
  input  layer_e                  mac_layer,
  input  logic [CW-1:0]           mac_chunk,
  input  logic [CW-1:0]           mac_vchunk,
  output logic [FANIN-1:0]        mac_spikes,
  // neuron-selector path
  input  logic                    sel_issue,
  input  layer_e                  sel_layer,
  input  logic [GW-1:0]           sel_group,
  input  logic                    sel_wb,
  input  layer_e                  sel_wlayer,
  input  logic [GW-1:0]           sel_wgroup,
  input  logic                    sel_wparity,
  input  logic                    sel_wfresh,
  output logic signed [POT_W-1:0] u_old   [SEL],
  output logic [DECAY_W-1:0]      beta    [SEL],
  output logic [SEL-1:0]          inh_old,
  input  logic signed [POT_W-1:0] u_save  [SEL],
  input  logic [SEL-1:0]          z,
  input  logic [SEL-1:0]          inh_new,
  // cache path
  input  logic                    cache_issue,
  input  logic [BIW-1:0]          cache_beat,
  input  logic [TW-1:0]           cache_step,
  // host port
  input  logic                    host_req,
  input  logic                    host_we,
  input  mem_e                    host_mem,
  input  logic [HADDR_W-1:0]      host_addr,
  input  logic [HOST_W-1:0]       host_wdata,
  output logic                    host_rvalid,
  output logic [HOST_W-1:0]       host_rdata,
  // hidden-layer weight bank (W = N*FANIN, D = CH)
  output logic                    whid_we,   output logic [CW-1:0] whid_waddr,
  output logic [N*FANIN/32-1:0]   whid_wmask, output logic [N*FANIN-1:0] whid_wdata,
  output logic                    whid_re,   output logic [CW-1:0] whid_raddr,
  input  logic [N*FANIN-1:0]      whid_rdata,
  // output-layer weight bank (W = WOUT_W, D = CH)
  output logic                    wout_we,   output logic [CW-1:0] wout_waddr,
  output logic [WOUT_W/32-1:0]    wout_wmask, output logic [WOUT_W-1:0] wout_wdata,
  output logic                    wout_re,   output logic [CW-1:0] wout_raddr,
  input  logic [WOUT_W-1:0]       wout_rdata,
  // input-layer weight bank (W = N, D = 1)
  output logic                    win_we,
  output logic [N/32-1:0]         win_wmask, output logic [N-1:0] win_wdata,
  output logic                    win_re,
  input  logic [N-1:0]            win_rdata,
  // input data bank (W = N/BEATS, D = T_MAX*BEATS)
  output logic                    inp_we,    output logic [IW-1:0] inp_waddr,
  output logic [BW/32-1:0]        inp_wmask, output logic [BW-1:0] inp_wdata,
  output logic                    inp_re,    output logic [IW-1:0] inp_raddr,
  input  logic [BW-1:0]           inp_rdata,
  // membrane potential bank (W = SEL*POT_W, D = ROWS)
  output logic                    pot_we,    output logic [RW-1:0] pot_waddr,
  output logic [SEL*POT_W/32-1:0] pot_wmask, output logic [SEL*POT_W-1:0] pot_wdata,
  output logic                    pot_re,    output logic [RW-1:0] pot_raddr,
  input  logic [SEL*POT_W-1:0]    pot_rdata,
  // decay-rate bank (W = SEL*DECAY_W, D = ROWS)
  output logic                    dec_we,    output logic [RW-1:0] dec_waddr,
  output logic [SEL*DECAY_W/32-1:0] dec_wmask, output logic [SEL*DECAY_W-1:0] dec_wdata,
  output logic                    dec_re,    output logic [RW-1:0] dec_raddr,
  input  logic [SEL*DECAY_W-1:0]  dec_rdata,
  // spike bank (W = SEL, D = 2*ROWS, one lane)
  output logic                    spk_we,    output logic [RW:0] spk_waddr,
  output logic [SEL-1:0]          spk_wdata,
  output logic                    spk_re,    output logic [RW:0] spk_raddr,
  input  logic [SEL-1:0]          spk_rdata,
  // inhibition bank (W = SEL, D = ROWS, one lane)
  output logic                    inh_we,    output logic [RW-1:0] inh_waddr,
  output logic [SEL-1:0]          inh_wdata,
  output logic                    inh_re,    output logic [RW-1:0] inh_raddr,
  input  logic [SEL-1:0]          inh_rdata
);

  localparam int unsigned SPC = SEL / FANIN;   // MAC chunks per spike row

  function automatic logic [RW-1:0] base(input layer_e l);
    unique case (l)
      LAYER_IN:  return '0;
      LAYER_HID: return RW'(G);
      default:   return RW'(2 * G);
    endcase
  endfunction

  // host decode: lanes of 32 bits (16 for the one-lane banks) per row
  localparam int unsigned L_WHID = N * FANIN / 32;
  localparam int unsigned L_WOUT = WOUT_W / 32;
  localparam int unsigned L_WIN  = N / 32;
  localparam int unsigned L_INP  = BW / 32;
  localparam int unsigned L_POT  = SEL * POT_W / 32;
  localparam int unsigned L_DEC  = SEL * DECAY_W / 32;

  logic hw, hr;
  assign hw = host_req &&  host_we && !busy;
  assign hr = host_req && !host_we && !busy;

  function automatic logic [HADDR_W-1:0] hrow(input logic [HADDR_W-1:0] a, input int unsigned lanes);
    return HADDR_W'(int'(a) / int'(lanes));
  endfunction
  function automatic int unsigned hlane(input logic [HADDR_W-1:0] a, input int unsigned lanes);
    return int'(a) % int'(lanes);
  endfunction

  // ---------------------------------------------------------------- weights
  always_comb begin
    whid_we = hw && host_mem == MEM_WGT_HID;
    whid_waddr = CW'(hrow(host_addr, L_WHID));
    whid_wmask = '0; whid_wmask[hlane(host_addr, L_WHID)] = 1'b1;
    whid_wdata = {L_WHID{host_wdata}};
    wout_we = hw && host_mem == MEM_WGT_OUT;
    wout_waddr = CW'(hrow(host_addr, L_WOUT));
    wout_wmask = '0; wout_wmask[hlane(host_addr, L_WOUT)] = 1'b1;
    wout_wdata = {L_WOUT{host_wdata}};
    win_we = hw && host_mem == MEM_WGT_IN;
    win_wmask = '0; win_wmask[hlane(host_addr, L_WIN)] = 1'b1;
    win_wdata = {L_WIN{host_wdata}};

    if (busy) begin
      whid_re    = mac_issue && mac_layer == LAYER_HID;
      whid_raddr = mac_chunk;
      wout_re    = mac_issue && mac_layer == LAYER_OUT;
      wout_raddr = mac_chunk;
      win_re     = mac_issue && mac_layer == LAYER_IN;
    end else begin
      whid_re    = hr && host_mem == MEM_WGT_HID;
      whid_raddr = CW'(hrow(host_addr, L_WHID));
      wout_re    = hr && host_mem == MEM_WGT_OUT;
      wout_raddr = CW'(hrow(host_addr, L_WOUT));
      win_re     = hr && host_mem == MEM_WGT_IN;
    end
  end

  // ----------------------------------------------------------- input data
  always_comb begin
    inp_we = hw && host_mem == MEM_INPUT;
    inp_waddr = IW'(hrow(host_addr, L_INP));
    inp_wmask = '0; inp_wmask[hlane(host_addr, L_INP)] = 1'b1;
    inp_wdata = {L_INP{host_wdata}};
    if (busy) begin
      inp_re    = cache_issue;
      inp_raddr = IW'(int'(cache_step) * int'(BEATS) + int'(cache_beat));
    end else begin
      inp_re    = hr && host_mem == MEM_INPUT;
      inp_raddr = IW'(hrow(host_addr, L_INP));
    end
  end

  // --------------------------------------- membrane, decay and inhibition
  logic [RW-1:0] sel_row, wb_row;
  assign sel_row = base(sel_layer) + RW'(sel_group);
  assign wb_row  = base(sel_wlayer) + RW'(sel_wgroup);

  always_comb begin
    if (busy) begin
      pot_we = sel_wb; pot_waddr = wb_row; pot_wmask = '1;
      for (int j = 0; j < int'(SEL); j++) pot_wdata[j*POT_W +: POT_W] = u_save[j];
      dec_we = 1'b0; dec_waddr = wb_row; dec_wmask = '0; dec_wdata = '0;
      inh_we = sel_wb; inh_waddr = wb_row; inh_wdata = inh_new;
      spk_we = sel_wb; spk_waddr = {sel_wparity, wb_row}; spk_wdata = z;
      pot_re = sel_issue; pot_raddr = sel_row;
      dec_re = sel_issue; dec_raddr = sel_row;
      inh_re = sel_issue; inh_raddr = sel_row;
    end else begin
      pot_we = hw && host_mem == MEM_POT; pot_waddr = RW'(hrow(host_addr, L_POT));
      pot_wmask = '0; pot_wmask[hlane(host_addr, L_POT)] = 1'b1;
      pot_wdata = {L_POT{host_wdata}};
      dec_we = hw && host_mem == MEM_DECAY; dec_waddr = RW'(hrow(host_addr, L_DEC));
      dec_wmask = '0; dec_wmask[hlane(host_addr, L_DEC)] = 1'b1;
      dec_wdata = {L_DEC{host_wdata}};
      inh_we = hw && host_mem == MEM_INH; inh_waddr = RW'(host_addr);
      inh_wdata = host_wdata[SEL-1:0];
      spk_we = hw && host_mem == MEM_SPIKE; spk_waddr = (RW+1)'(host_addr);
      spk_wdata = host_wdata[SEL-1:0];
      pot_re = hr && host_mem == MEM_POT;   pot_raddr = RW'(hrow(host_addr, L_POT));
      dec_re = hr && host_mem == MEM_DECAY; dec_raddr = RW'(hrow(host_addr, L_DEC));
      inh_re = hr && host_mem == MEM_INH;   inh_raddr = RW'(host_addr);
    end
  end

  // data towards the MAU and the Schmitt triggers
  logic fresh_zero;
  assign fresh_zero = sel_wfresh && init_state;
  always_comb begin
    for (int j = 0; j < int'(SEL); j++) begin
      u_old[j] = fresh_zero ? '0 : pot_rdata[j*POT_W +: POT_W];
      beta[j]  = dec_rdata[j*DECAY_W +: DECAY_W];
    end
    inh_old = fresh_zero ? '0 : inh_rdata;
  end

  // ------------------------------------------------------ stored spikes
  layer_e prev_layer;
  logic   no_prev;
  assign prev_layer = (mac_layer == LAYER_OUT) ? LAYER_HID : LAYER_IN;
  always_comb begin
    if (busy) begin
      spk_re    = mac_issue && mac_layer != LAYER_IN;
      spk_raddr = {~step[0], base(prev_layer) + RW'(mac_chunk / CW'(SPC))};
    end else begin
      spk_re    = hr && host_mem == MEM_SPIKE;
      spk_raddr = (RW+1)'(host_addr);
    end
  end
  assign no_prev    = (step == '0);
  assign mac_spikes = no_prev ? '0 : spk_rdata[(int'(mac_vchunk) % int'(SPC)) * FANIN +: FANIN];

  // ----------------------------------------------------------- host reads
  mem_e                 rd_mem;
  logic [HADDR_W-1:0]   rd_addr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      host_rvalid <= 1'b0;
      rd_mem      <= MEM_WGT_HID;
      rd_addr     <= '0;
    end else begin
      host_rvalid <= hr;
      if (hr) begin
        rd_mem  <= host_mem;
        rd_addr <= host_addr;
      end
    end
  end

  always_comb begin
    host_rdata = '0;
    unique case (rd_mem)
      MEM_WGT_HID: host_rdata = whid_rdata[hlane(rd_addr, L_WHID)*32 +: 32];
      MEM_WGT_OUT: host_rdata = wout_rdata[hlane(rd_addr, L_WOUT)*32 +: 32];
      MEM_WGT_IN:  host_rdata = win_rdata[hlane(rd_addr, L_WIN)*32 +: 32];
      MEM_INPUT:   host_rdata = inp_rdata[hlane(rd_addr, L_INP)*32 +: 32];
      MEM_POT:     host_rdata = pot_rdata[hlane(rd_addr, L_POT)*32 +: 32];
      MEM_DECAY:   host_rdata = dec_rdata[hlane(rd_addr, L_DEC)*32 +: 32];
      MEM_SPIKE:   host_rdata = HOST_W'(spk_rdata);
      MEM_INH:     host_rdata = HOST_W'(inh_rdata);
      default:     host_rdata = '0;
    endcase
  end

endmodule
