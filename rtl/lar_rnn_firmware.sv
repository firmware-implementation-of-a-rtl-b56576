// lar_rnn_firmware: energy reconstruction for one FPGA's calorimeter channels.
//
// N_CHANNELS channels are served by N_NETWORKS instances of the vanilla RNN,
// each time-multiplexed over MUX channels (28 x 14 = 392 slots for 384
// channels; the spare slots carry no valid data). Channel c is handled by
// network c / MUX in slot c % MUX. Per network, a channel_mux turns the
// bunch-crossing-parallel samples into a one-per-clock stream, the network
// computes one energy per sample, and a channel_demux gathers the energies
// of a round back into per-channel outputs.
//
// Clocking: one clock at MUX times the bunch-crossing rate (14 x 40 MHz =
// 560 MHz for the full configuration). bc_strobe marks a bunch crossing: a
// one-cycle pulse every MUX cycles, with the new samples of all channels on
// samples[] and bc_valid. energy[] is updated, with energy_strobe pulsing,
// once per bunch crossing; energy_valid[c] tells whether channel c had five
// valid samples in its window. The energies of the windows ending with the
// samples of one strobe are on energy[] when energy_strobe is high, NET_LAT
// + MUX clock edges after the edge that sampled that bc_strobe.
//
// Weights: cfg_we loads one 16-bit weight of one channel (network cfg_net,
// slot cfg_ch, address cfg_addr in the rnn_pkg WA_* map).
//
// 28 networks multiplexing 14 channels each for 384 channels is the
// original firmware's configuration; the channel-to-slot mapping, the
// strobe-based clocking and the configuration port are this design's own.
module lar_rnn_firmware
  import rnn_pkg::*;
#(
  parameter int unsigned N_NET  = N_NETWORKS,
  parameter int unsigned MUX    = MUX_DEFAULT,
  parameter int unsigned N_CH   = N_CHANNELS,
  localparam int unsigned CH_W  = (MUX > 1) ? $clog2(MUX) : 1,
  localparam int unsigned NET_W = (N_NET > 1) ? $clog2(N_NET) : 1
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               bc_strobe,
  input  logic               bc_valid,
  input  data_t              samples [N_CH],
  input  logic               cfg_we,
  input  logic [NET_W-1:0]   cfg_net,
  input  logic [CH_W-1:0]    cfg_ch,
  input  logic [WADDR_W-1:0] cfg_addr,
  input  weight_t            cfg_data,
  output logic               energy_strobe,
  output logic               energy_valid [N_CH],
  output data_t              energy       [N_CH]
);
  logic net_strobe [N_NET];

  for (genvar n = 0; n < N_NET; n++) begin : g_net
    data_t           smp [MUX];
    logic            sv, ev;
    logic [CH_W-1:0] sch, ech;
    data_t           sx, ee;
    logic            e_v [MUX];
    data_t           e_e [MUX];

    for (genvar s = 0; s < MUX; s++) begin : g_slot
      localparam int unsigned C = n*MUX + s;
      if (C < N_CH) begin : g_used
        assign smp[s] = samples[C];
        assign energy[C]       = e_e[s];
        assign energy_valid[C] = e_v[s];
      end else begin : g_spare
        assign smp[s] = '0;
      end
    end

    // Spare slots (no channel behind them) never carry valid data.
    logic sv_slot;
    always_comb sv_slot = sv && (n*MUX + 32'(sch) < N_CH);

    channel_mux #(.MUX(MUX)) u_mux (
      .clk, .rst, .bc_strobe, .bc_valid, .samples(smp),
      .out_valid(sv), .out_ch(sch), .out_x(sx)
    );

    vanilla_rnn #(.MUX(MUX)) u_rnn (
      .clk, .rst,
      .in_valid(sv_slot), .in_ch(sch), .in_x(sx),
      .cfg_we(cfg_we && (32'(cfg_net) == n)), .cfg_ch, .cfg_addr, .cfg_data,
      .out_valid(ev), .out_ch(ech), .out_e(ee)
    );

    channel_demux #(.MUX(MUX)) u_demux (
      .clk, .rst, .in_valid(ev), .in_ch(ech), .in_e(ee),
      .out_strobe(net_strobe[n]), .energy_valid(e_v), .energy(e_e)
    );
  end

  assign energy_strobe = net_strobe[0];

  initial assert (N_NET*MUX >= N_CH) else $error("lar_rnn_firmware: N_NET*MUX must cover N_CH channels");
endmodule
