// tb_lar_rnn_full: the firmware at its full size, 28 networks x 14 slots
// for 384 channels, with no parameter overridden. Loads distinct random
// weights into all 384 channels, runs bunch crossings with random samples
// and checks every channel's energy of every crossing against the integer
// reference, with the same mechanism counters as the reduced end-to-end test.
module tb_lar_rnn_full;
  import rnn_pkg::*;
  import rnn_ref_pkg::*;
  localparam int NNET = N_NETWORKS, M = MUX_DEFAULT, NCH = N_CHANNELS;
  localparam int NBC  = 14;
  localparam int NETW = (NNET > 1) ? $clog2(NNET) : 1;
  localparam int CHW  = (M > 1) ? $clog2(M) : 1;
`include "lar_tb_body.svh"

  lar_rnn_firmware dut (
    .clk, .rst, .bc_strobe, .bc_valid, .samples, .cfg_we, .cfg_net, .cfg_ch, .cfg_addr,
    .cfg_data, .energy_strobe, .energy_valid, .energy);
endmodule
