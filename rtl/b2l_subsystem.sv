// b2l_subsystem -- records the trigger's data streams for the experiment's
// data acquisition and sends them out as packets (Belle2Link subsystem).
//
//   channels --> Channel Alignment --> Channel Delay (per channel) --+--> DAQ Buffer 0 --+
//                                                                    +--> DAQ Buffer 1 --+--> Arbiter --> link
//   trig_in  --> Trigger Delay --> Dispatcher --(start)--> DAQ Buffers
//
// The N_CH input streams (here: the TC stream entering the network and the
// cluster stream leaving it) are first aligned word by word, then each is
// delayed by a run-time delay, so that a delayed trigger finds its event at
// the buffers' input. The dispatcher gives each trigger to a free DAQ
// buffer, which captures WIN aligned words (all channels side by side) and
// then asks the round-robin arbiter for the output. Packets: one header
// word and WIN data words (see daq_buffer), sop/eop marked. A window word is captured
// when any channel is valid.
// Delays are set over the cfg bus, target TGT_B2L: address c < N_CH is the
// delay of channel c, address N_CH the trigger delay (reset value 1 cycle).
// The serial Belle2Link physical layer is outside this module: b2l_* is the
// word stream handed to it. Structure per the published block diagram; word
// formats, WIN and buffer count defaults are this implementation's choices
// (two buffers as drawn).
module b2l_subsystem
  import gnn_pkg::*;
#(
  parameter int unsigned N_CH        = 2,
  parameter int unsigned CH_W        = 64,
  parameter int unsigned N_BUF       = 2,
  parameter int unsigned WIN         = 32,
  parameter int unsigned ALIGN_DEPTH = 256,
  parameter int unsigned DLY_DEPTH   = 256,
  parameter int unsigned TRG_DEPTH   = 1024
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  cfg_bus_t                   cfg,
  input  logic [N_CH-1:0]            ch_valid,
  input  logic [N_CH-1:0][CH_W-1:0]  ch_data,
  input  logic                       trig_in,
  output logic                       b2l_valid,
  output logic                       b2l_sop,
  output logic                       b2l_eop,
  output logic [N_CH*CH_W-1:0]       b2l_data,
  output logic                       synced,
  output logic [15:0]                n_events,
  output logic [15:0]                n_dropped
);
  localparam int unsigned W   = N_CH * CH_W;
  localparam int unsigned DAW = $clog2(DLY_DEPTH);
  localparam int unsigned TAW = $clog2(TRG_DEPTH) + 1;

  // run-time delays
  logic [N_CH-1:0][DAW-1:0] ch_dly;
  logic [TAW-1:0]           trg_dly;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CH; c++) ch_dly[c] <= DAW'(1);
      trg_dly <= TAW'(1);
    end else if (cfg.we && cfg.tgt == TGT_B2L) begin
      for (int c = 0; c < N_CH; c++)
        if (int'(cfg.addr) == c) ch_dly[c] <= DAW'(cfg.data);
      if (int'(cfg.addr) == N_CH) trg_dly <= TAW'(cfg.data);
    end
  end

  // alignment
  logic                   al_valid;
  logic [N_CH-1:0][CH_W-1:0] al_data;
  channel_alignment #(.N_CH(N_CH), .W(CH_W), .DEPTH(ALIGN_DEPTH)) u_align (
    .clk, .rst_n, .in_valid(ch_valid), .in_data(ch_data),
    .out_valid(al_valid), .out_data(al_data), .out_synced(synced));

  // channel delays
  logic [N_CH-1:0]           dl_valid;
  logic [N_CH-1:0][CH_W-1:0] dl_data;
  for (genvar c = 0; c < N_CH; c++) begin : g_dly
    channel_delay #(.W(CH_W), .DEPTH(DLY_DEPTH)) u_dly (
      .clk, .rst_n, .delay(ch_dly[c]), .in_valid(al_valid), .in_data(al_data[c]),
      .out_valid(dl_valid[c]), .out_data(dl_data[c]));
  end

  // trigger path
  logic trig_d;
  trigger_delay #(.DEPTH(TRG_DEPTH)) u_tdly (
    .clk, .rst_n, .delay(trg_dly), .trig_in, .trig_out(trig_d));

  logic [N_BUF-1:0] busy, start, req, grant;
  logic [15:0]      event_no;
  dispatcher #(.N_BUF(N_BUF)) u_disp (
    .clk, .rst_n, .trig(trig_d), .busy, .start, .event_no, .n_events, .n_dropped);

  // DAQ buffers
  logic [N_BUF-1:0]        o_valid, o_sop, o_eop;
  logic [N_BUF-1:0][W-1:0] o_data;
  for (genvar b = 0; b < N_BUF; b++) begin : g_buf
    daq_buffer #(.W(W), .WIN(WIN), .BUF_ID(b)) u_buf (
      .clk, .rst_n, .start(start[b]), .event_no, .in_valid(|dl_valid), .in_data(dl_data),
      .busy(busy[b]), .req(req[b]), .grant(grant[b]),
      .out_valid(o_valid[b]), .out_sop(o_sop[b]), .out_eop(o_eop[b]), .out_data(o_data[b]));
  end

  // arbiter and output
  rr_arbiter #(.N(N_BUF)) u_arb (
    .clk, .rst_n, .req, .release_grant(|(o_eop & grant)), .grant);

  always_comb begin
    b2l_valid = 1'b0; b2l_sop = 1'b0; b2l_eop = 1'b0; b2l_data = '0;
    for (int b = 0; b < N_BUF; b++)
      if (grant[b]) begin
        b2l_valid = o_valid[b]; b2l_sop = o_sop[b]; b2l_eop = o_eop[b]; b2l_data = o_data[b];
      end
  end

  a_one_sender: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(o_valid));
endmodule
