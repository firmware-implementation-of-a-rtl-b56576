// tb_lar_rnn_firmware: end-to-end test of the multi-network firmware at a
// reduced size: 2 networks x 4 slots for 7 channels, so one slot is spare.
// Every channel gets its own random weights through the configuration port
// while bunch crossings already run (with bc_valid low); then random samples
// arrive every bunch crossing, one crossing being marked invalid. Each
// energy_strobe is matched to the bunch crossing NET_LAT + MUX edges before
// it (latency check) and every channel's energy and valid flag are compared
// with the integer reference of its 5-sample window. The testbench counts
// how often each mechanism occurred and fails if one never did: valid
// energies on every channel (multiplexing over slots and networks), windows
// made invalid by warm-up or by an invalid crossing, first-cell ReLU
// clipping, recurrent/dense ReLU clipping to a zero state lane, and output
// rounding that differs from truncation.
module tb_lar_rnn_firmware;
  import rnn_pkg::*;
  import rnn_ref_pkg::*;
  localparam int NNET = 2, M = 4, NCH = 7;
  localparam int NBC  = 40;
  localparam int NETW = (NNET > 1) ? $clog2(NNET) : 1;
  localparam int CHW  = (M > 1) ? $clog2(M) : 1;
`include "lar_tb_body.svh"

  lar_rnn_firmware #(.N_NET(NNET), .MUX(M), .N_CH(NCH)) dut (
    .clk, .rst, .bc_strobe, .bc_valid, .samples, .cfg_we, .cfg_net, .cfg_ch, .cfg_addr,
    .cfg_data, .energy_strobe, .energy_valid, .energy);
endmodule
