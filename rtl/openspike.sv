// openspike: the OpenSpike accelerator core with its SRAM banks.
//
// N hardware neurons (each a MAC unit and a potential adder) are reused for the
// three layers of a dense spiking network: N input neurons with one synapse
// each, N hidden neurons and N_OUT output neurons with N synapses each. Weights
// are binary (+1/-1). While the MACs accumulate one layer FANIN synapses per
// cycle, the previous layer's results wait in the potential adders and are
// finished SEL neurons per cycle: the MAU decays the stored potentials, the
// neuron selector adds them to the held currents, the Schmitt triggers of the
// spike processor emit spikes and update the inhibition bits, the MAU resets the
// neurons that spiked and the memory controller writes everything back.
// Spikes of the previous time step feed the next layer (the x_{t-1} term of the
// neuron equation), so an input needs two steps to reach the output layer.
//
// Interface: the host fills the banks through the host port while the core is
// idle (see memory_controller for the word layout), sets the thresholds and
// pulses start with num_steps. busy is high during the run, out_valid pulses
// with the output-layer spikes of time step out_step, done pulses at the end.
// Timing for the default sizes: 9 cycles of cache preload, then 517 cycles per
// time step (3 input, 257 hidden, 257 output), then 3 cycles of flush.
// The architecture, block split, sizes and cycle budget follow the paper; the
// host port, bank organisation and start/done protocol are this design's own.
module openspike
  import snn_pkg::*;
#(
  parameter int unsigned N         = 1024,
  parameter int unsigned N_OUT     = 10,
  parameter int unsigned FANIN     = 4,
  parameter int unsigned SEL       = 16,
  parameter int unsigned BEATS     = 8,
  parameter int unsigned T_MAX     = 128,
  parameter bit          RESET_SUB = 1'b1,
  localparam int unsigned ACC_W    = $clog2(N) + 2,
  localparam int unsigned CH       = N / FANIN,
  localparam int unsigned G        = N / SEL,
  localparam int unsigned G_OUT    = (N_OUT + SEL - 1) / SEL,
  localparam int unsigned ROWS     = 2 ** $clog2(2 * G + G_OUT),
  localparam int unsigned WOUT_W   = ((N_OUT * FANIN + 31) / 32) * 32,
  localparam int unsigned CW       = $clog2(CH),
  localparam int unsigned GW       = $clog2(G),
  localparam int unsigned RW       = $clog2(ROWS),
  localparam int unsigned BIW      = (BEATS > 1) ? $clog2(BEATS) : 1,
  localparam int unsigned TW       = $clog2(T_MAX) + 1,
  localparam int unsigned IW       = $clog2(T_MAX * BEATS),
  localparam int unsigned BW       = N / BEATS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // run control
  input  logic                    start,
  input  logic [TW-1:0]           num_steps,
  input  logic                    init_state,
  input  logic signed [POT_W-1:0] uthr_h,
  input  logic signed [POT_W-1:0] uthr_l,
  output logic                    busy,
  output logic                    done,
  output logic                    out_valid,
  output logic [TW-1:0]           out_step,
  output logic [N_OUT-1:0]        out_spikes,
  // host port (stands where the DMA connects)
  input  logic                    host_req,
  input  logic                    host_we,
  input  mem_e                    host_mem,
  input  logic [HADDR_W-1:0]      host_addr,
  input  logic [HOST_W-1:0]       host_wdata,
  output logic                    host_rvalid,
  output logic [HOST_W-1:0]       host_rdata
);

  // ------------------------------------------------------------ control unit
  logic [TW-1:0]   step, cache_step;
  logic            transfer, mac_issue, mac_valid, mac_first;
  layer_e          mac_layer, mac_vlayer, sel_layer, sel_wlayer;
  logic [CW-1:0]   mac_chunk, mac_vchunk;
  logic            sel_issue, sel_wb, sel_wparity, sel_wfresh;
  logic [GW-1:0]   sel_group, sel_wgroup;
  logic            cache_issue, cache_wb;
  logic [BIW-1:0]  cache_beat, cache_wbeat;

  control_unit #(.N(N), .N_OUT(N_OUT), .FANIN(FANIN), .SEL(SEL), .BEATS(BEATS), .T_MAX(T_MAX)) u_ctrl (
    .clk, .rst_n, .start, .num_steps, .busy, .done, .state(), .step,
    .transfer, .mac_issue, .mac_layer, .mac_chunk, .mac_valid, .mac_vlayer, .mac_vchunk, .mac_first,
    .sel_issue, .sel_layer, .sel_group, .sel_wb, .sel_wlayer, .sel_wgroup, .sel_wparity, .sel_wfresh,
    .cache_issue, .cache_beat, .cache_step, .cache_wb, .cache_wbeat
  );

  // ------------------------------------------------------------- SRAM banks
  logic whid_we, whid_re; logic [CW-1:0] whid_waddr, whid_raddr;
  logic [N*FANIN/32-1:0] whid_wmask; logic [N*FANIN-1:0] whid_wdata, whid_rdata;
  logic wout_we, wout_re; logic [CW-1:0] wout_waddr, wout_raddr;
  logic [WOUT_W/32-1:0] wout_wmask; logic [WOUT_W-1:0] wout_wdata, wout_rdata;
  logic win_we, win_re; logic [N/32-1:0] win_wmask; logic [N-1:0] win_wdata, win_rdata;
  logic inp_we, inp_re; logic [IW-1:0] inp_waddr, inp_raddr;
  logic [BW/32-1:0] inp_wmask; logic [BW-1:0] inp_wdata, inp_rdata;
  logic pot_we, pot_re; logic [RW-1:0] pot_waddr, pot_raddr;
  logic [SEL*POT_W/32-1:0] pot_wmask; logic [SEL*POT_W-1:0] pot_wdata, pot_rdata;
  logic dec_we, dec_re; logic [RW-1:0] dec_waddr, dec_raddr;
  logic [SEL*DECAY_W/32-1:0] dec_wmask; logic [SEL*DECAY_W-1:0] dec_wdata, dec_rdata;
  logic spk_we, spk_re; logic [RW:0] spk_waddr, spk_raddr; logic [SEL-1:0] spk_wdata, spk_rdata;
  logic inh_we, inh_re; logic [RW-1:0] inh_waddr, inh_raddr; logic [SEL-1:0] inh_wdata, inh_rdata;

  sram_dp #(.W(N*FANIN), .D(CH), .LANE(32)) u_wgt_hid (
    .clk, .we(whid_we), .waddr(whid_waddr), .wmask(whid_wmask), .wdata(whid_wdata),
    .re(whid_re), .raddr(whid_raddr), .rdata(whid_rdata));
  sram_dp #(.W(WOUT_W), .D(CH), .LANE(32)) u_wgt_out (
    .clk, .we(wout_we), .waddr(wout_waddr), .wmask(wout_wmask), .wdata(wout_wdata),
    .re(wout_re), .raddr(wout_raddr), .rdata(wout_rdata));
  sram_dp #(.W(N), .D(1), .LANE(32)) u_wgt_in (
    .clk, .we(win_we), .waddr(1'b0), .wmask(win_wmask), .wdata(win_wdata),
    .re(win_re), .raddr(1'b0), .rdata(win_rdata));
  sram_dp #(.W(BW), .D(T_MAX*BEATS), .LANE(32)) u_input (
    .clk, .we(inp_we), .waddr(inp_waddr), .wmask(inp_wmask), .wdata(inp_wdata),
    .re(inp_re), .raddr(inp_raddr), .rdata(inp_rdata));
  sram_dp #(.W(SEL*POT_W), .D(ROWS), .LANE(32)) u_pot (
    .clk, .we(pot_we), .waddr(pot_waddr), .wmask(pot_wmask), .wdata(pot_wdata),
    .re(pot_re), .raddr(pot_raddr), .rdata(pot_rdata));
  sram_dp #(.W(SEL*DECAY_W), .D(ROWS), .LANE(32)) u_decay (
    .clk, .we(dec_we), .waddr(dec_waddr), .wmask(dec_wmask), .wdata(dec_wdata),
    .re(dec_re), .raddr(dec_raddr), .rdata(dec_rdata));
  sram_dp #(.W(SEL), .D(2*ROWS), .LANE(SEL)) u_spike (
    .clk, .we(spk_we), .waddr(spk_waddr), .wmask(1'b1), .wdata(spk_wdata),
    .re(spk_re), .raddr(spk_raddr), .rdata(spk_rdata));
  sram_dp #(.W(SEL), .D(ROWS), .LANE(SEL)) u_inh (
    .clk, .we(inh_we), .waddr(inh_waddr), .wmask(1'b1), .wdata(inh_wdata),
    .re(inh_re), .raddr(inh_raddr), .rdata(inh_rdata));

  // ------------------------------------------------------ memory controller
  logic [FANIN-1:0]        mac_spikes;
  logic signed [POT_W-1:0] u_old [SEL], u_dec [SEL], u_new [SEL], u_save [SEL];
  logic [DECAY_W-1:0]      beta [SEL];
  logic [SEL-1:0]          inh_old, inh_new, z;

  memory_controller #(.N(N), .N_OUT(N_OUT), .FANIN(FANIN), .SEL(SEL), .BEATS(BEATS), .T_MAX(T_MAX)) u_memctl (
    .clk, .rst_n, .busy, .step, .init_state,
    .mac_issue, .mac_layer, .mac_chunk, .mac_vchunk, .mac_spikes,
    .sel_issue, .sel_layer, .sel_group, .sel_wb, .sel_wlayer, .sel_wgroup, .sel_wparity, .sel_wfresh,
    .u_old, .beta, .inh_old, .u_save, .z, .inh_new,
    .cache_issue, .cache_beat, .cache_step,
    .host_req, .host_we, .host_mem, .host_addr, .host_wdata, .host_rvalid, .host_rdata,
    .whid_we, .whid_waddr, .whid_wmask, .whid_wdata, .whid_re, .whid_raddr, .whid_rdata,
    .wout_we, .wout_waddr, .wout_wmask, .wout_wdata, .wout_re, .wout_raddr, .wout_rdata,
    .win_we, .win_wmask, .win_wdata, .win_re, .win_rdata,
    .inp_we, .inp_waddr, .inp_wmask, .inp_wdata, .inp_re, .inp_raddr, .inp_rdata,
    .pot_we, .pot_waddr, .pot_wmask, .pot_wdata, .pot_re, .pot_raddr, .pot_rdata,
    .dec_we, .dec_waddr, .dec_wmask, .dec_wdata, .dec_re, .dec_raddr, .dec_rdata,
    .spk_we, .spk_waddr, .spk_wdata, .spk_re, .spk_raddr, .spk_rdata,
    .inh_we, .inh_waddr, .inh_wdata, .inh_re, .inh_raddr, .inh_rdata
  );

  // -------------------------------------------------------- spike processor
  logic [N-1:0] cache;

  spike_processor #(.N(N), .SEL(SEL), .BEATS(BEATS)) u_spk (
    .clk, .rst_n, .load(cache_wb), .beat(cache_wbeat), .load_data(inp_rdata), .cache,
    .u(u_new), .inh_old, .uthr_h, .uthr_l, .z, .inh_new
  );

  // --------------------------------------------------------------------- MAU
  mau #(.SEL(SEL), .RESET_SUB(RESET_SUB)) u_mau (
    .u_old, .beta, .u_dec, .u_new, .z, .uthr_h, .u_save
  );

  // ------------------------------------------- neuron input selector + neurons
  logic [FANIN-1:0]        nx [N], nw [N];
  logic [N-1:0]            nen;
  logic signed [ACC_W-1:0] acc [N];
  logic signed [POT_W-1:0] dec_to_n [N], n_sum [N];

  neuron_input_selector #(.N(N), .N_OUT(N_OUT), .FANIN(FANIN), .WOUT_W(WOUT_W)) u_insel (
    .valid(mac_valid), .layer(mac_vlayer), .spikes(mac_spikes), .cache,
    .w_in(win_rdata), .w_hid(whid_rdata), .w_out(wout_rdata),
    .x(nx), .w(nw), .en(nen)
  );

  for (genvar i = 0; i < int'(N); i++) begin : g_neuron
    mac_unit #(.FANIN(FANIN), .ACC_W(ACC_W)) u_mac (
      .clk, .rst_n, .en(nen[i]), .clear(mac_valid && mac_first),
      .x(nx[i]), .w(nw[i]), .acc(acc[i])
    );
    potential_adder #(.ACC_W(ACC_W)) u_padd (
      .clk, .rst_n, .load(transfer), .mac_in(acc[i]), .dec_in(dec_to_n[i]), .sum(n_sum[i])
    );
  end

  // --------------------------------------------------------- neuron selector
  neuron_selector #(.N(N), .SEL(SEL)) u_nsel (
    .group(sel_wgroup), .dec_in(u_dec), .dec_out(dec_to_n), .sum_in(n_sum), .sel_sum(u_new)
  );

  // ----------------------------------------------------- output-layer spikes
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_step   <= '0;
      out_spikes <= '0;
    end else begin
      out_valid <= sel_wb && sel_wlayer == LAYER_OUT && sel_wgroup == '0;
      if (sel_wb && sel_wlayer == LAYER_OUT && sel_wgroup == '0) begin
        out_spikes <= z[N_OUT-1:0];
        out_step   <= step - 1'b1;
      end
    end
  end

endmodule
