// control_unit: time-step sequencer of the accelerator core.
//
// After start it fills the input spike cache once (PRELOAD, BEATS+1 cycles) and
// then runs num_steps time steps, each made of three states:
//  * ST_IN  (2 + G_OUT cycles, 3 for the default sizes): cycle 0 initialises:
//    the MAC results of the output layer move into the potential adders and the
//    input-layer weight row is read; cycle 1 accumulates the input layer (one
//    synapse per neuron); the output layer of the previous step is then read
//    and saved, 16 neurons per cycle (skipped in step 0).
//  * ST_HID (N/FANIN + 1 cycles, 257): cycle 0 moves the input-layer MAC
//    results into the potential adders; the MACs then accumulate the hidden
//    layer FANIN synapses per cycle while the neuron selector finishes the
//    input layer SEL neurons per cycle (N/SEL = 64 cycles).
//  * ST_OUT (N/FANIN + 1 cycles, 257): the same for the output layer's N_OUT
//    MACs, while the hidden layer is finished and the cache is refilled with
//    the next step's input in BEATS cycles.
// A final ST_FLUSH (2 + G_OUT cycles) saves the output layer of the last step;
// done pulses as it ends.
// Three pipelines are driven: MAC (mac_issue -> mac_valid), neuron selector
// (sel_issue -> sel_wb) and cache (cache_issue -> cache_wb); each *_issue
// cycle reads SRAM, the registered *_valid/*_wb cycle uses the data one cycle
// later. The three states, their order and their lengths in the paper (3, 256
// and 256 cycles plus the 64-cycle and 8-cycle overlapped tasks) follow the
// paper; the extra issue cycle of each layer, PRELOAD and FLUSH are this
// design's choice.
module control_unit
  import snn_pkg::*;
#(
  parameter int unsigned N     = 1024,
  parameter int unsigned N_OUT = 10,
  parameter int unsigned FANIN = 4,
  parameter int unsigned SEL   = 16,
  parameter int unsigned BEATS = 8,
  parameter int unsigned T_MAX = 128,
  localparam int unsigned CH   = N / FANIN,              // MAC cycles per layer
  localparam int unsigned G    = N / SEL,                // selector groups per layer
  localparam int unsigned G_OUT = (N_OUT + SEL - 1) / SEL,
  localparam int unsigned CW   = $clog2(CH),
  localparam int unsigned GW   = $clog2(G),
  localparam int unsigned BIW  = (BEATS > 1) ? $clog2(BEATS) : 1,
  localparam int unsigned TW   = $clog2(T_MAX) + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [TW-1:0] num_steps,
  output logic          busy,
  output logic          done,
  output state_e        state,
  output logic [TW-1:0] step,
  // MAC pipeline
  output logic          transfer,
  output logic          mac_issue,
  output layer_e        mac_layer,
  output logic [CW-1:0] mac_chunk,
  output logic          mac_valid,
  output layer_e        mac_vlayer,
  output logic [CW-1:0] mac_vchunk,
  output logic          mac_first,
  // neuron selector pipeline
  output logic          sel_issue,
  output layer_e        sel_layer,
  output logic [GW-1:0] sel_group,
  output logic          sel_wb,
  output layer_e        sel_wlayer,
  output logic [GW-1:0] sel_wgroup,
  output logic          sel_wparity,
  output logic          sel_wfresh,
  // input spike cache pipeline
  output logic          cache_issue,
  output logic [BIW-1:0] cache_beat,
  output logic [TW-1:0] cache_step,
  output logic          cache_wb,
  output logic [BIW-1:0] cache_wbeat
);

  localparam int unsigned CNTW = $clog2(CH + 2) + 1;

  logic [CNTW-1:0] cnt;
  logic [TW-1:0]   nsteps;
  logic            last_cycle;

  // length of the current state, minus one
  always_comb begin
    unique case (state)
      ST_PRELOAD:       last_cycle = (cnt == CNTW'(BEATS));
      ST_IN, ST_FLUSH:  last_cycle = (cnt == CNTW'(G_OUT + 1));
      ST_HID, ST_OUT:   last_cycle = (cnt == CNTW'(CH));
      default:          last_cycle = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= ST_IDLE;
      cnt    <= '0;
      step   <= '0;
      nsteps <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (state == ST_IDLE) begin
        if (start) begin
          state  <= ST_PRELOAD;
          cnt    <= '0;
          step   <= '0;
          nsteps <= (num_steps == '0) ? TW'(1) :
                    (num_steps > TW'(T_MAX)) ? TW'(T_MAX) : num_steps;
        end
      end else if (!last_cycle) begin
        cnt <= cnt + 1'b1;
      end else begin
        cnt <= '0;
        unique case (state)
          ST_PRELOAD: state <= ST_IN;
          ST_IN:      state <= ST_HID;
          ST_HID:     state <= ST_OUT;
          ST_OUT: begin
            step  <= step + 1'b1;
            state <= (step + 1'b1 == nsteps) ? ST_FLUSH : ST_IN;
          end
          ST_FLUSH: begin
            state <= ST_IDLE;
            done  <= 1'b1;
          end
          default: state <= ST_IDLE;
        endcase
      end
    end
  end

  assign busy = (state != ST_IDLE);

  // issue-side control, decoded from state and counter
  always_comb begin
    transfer    = 1'b0;
    mac_issue   = 1'b0;
    mac_layer   = LAYER_IN;
    mac_chunk   = '0;
    sel_issue   = 1'b0;
    sel_layer   = LAYER_IN;
    sel_group   = '0;
    cache_issue = 1'b0;
    cache_beat  = '0;
    cache_step  = step;
    unique case (state)
      ST_PRELOAD: begin
        cache_issue = (cnt < CNTW'(BEATS));
        cache_beat  = BIW'(cnt);
      end
      ST_IN, ST_FLUSH: begin
        transfer  = (cnt == '0);
        mac_issue = (state == ST_IN) && (cnt == '0);
        mac_layer = LAYER_IN;
        sel_layer = LAYER_OUT;
        sel_issue = (cnt >= CNTW'(1)) && (cnt <= CNTW'(G_OUT)) && (step != '0);
        sel_group = GW'(cnt - 1'b1);
      end
      ST_HID, ST_OUT: begin
        transfer  = (cnt == '0);
        mac_issue = (cnt < CNTW'(CH));
        mac_layer = (state == ST_HID) ? LAYER_HID : LAYER_OUT;
        mac_chunk = CW'(cnt);
        sel_issue = (cnt < CNTW'(G));
        sel_layer = (state == ST_HID) ? LAYER_IN : LAYER_HID;
        sel_group = GW'(cnt);
        if (state == ST_OUT) begin
          cache_issue = (cnt < CNTW'(BEATS)) && (step + 1'b1 < nsteps);
          cache_beat  = BIW'(cnt);
          cache_step  = step + 1'b1;
        end
      end
      default: ;
    endcase
  end

  // one-cycle pipeline to the data-use side
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mac_valid   <= 1'b0;
      mac_vlayer  <= LAYER_IN;
      mac_vchunk  <= '0;
      sel_wb      <= 1'b0;
      sel_wlayer  <= LAYER_IN;
      sel_wgroup  <= '0;
      sel_wparity <= 1'b0;
      sel_wfresh  <= 1'b0;
      cache_wb    <= 1'b0;
      cache_wbeat <= '0;
    end else begin
      mac_valid   <= mac_issue;
      mac_vlayer  <= mac_layer;
      mac_vchunk  <= mac_chunk;
      sel_wb      <= sel_issue;
      sel_wlayer  <= sel_layer;
      sel_wgroup  <= sel_group;
      // spikes of step s go to parity s[0]; the output layer is saved one step late
      sel_wparity <= (sel_layer == LAYER_OUT) ? ~step[0] : step[0];
      sel_wfresh  <= (sel_layer == LAYER_OUT) ? (step == TW'(1)) : (step == '0);
      cache_wb    <= cache_issue;
      cache_wbeat <= cache_beat;
    end
  end

  assign mac_first = (mac_vchunk == '0);

  // a pipeline never issues outside a run
  assert property (@(posedge clk) disable iff (!rst_n) !busy |-> !(mac_issue || sel_issue || cache_issue));
  // the MAC path and the selector path never serve the same layer at once
  assert property (@(posedge clk) disable iff (!rst_n) (mac_issue && sel_issue) |-> (mac_layer != sel_layer));

endmodule
