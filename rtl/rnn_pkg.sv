// rnn_pkg: types, sizes, fixed-point helpers and pipeline latencies shared by
// the vanilla-RNN energy-reconstruction datapath.
//
// Number formats. Samples, internal results and energies are 19-bit signed
// fixed point and weights are 16-bit signed fixed point; both widths are the
// ones of the original firmware. Where the binary point sits was not
// published; DATA_FRAC and WEIGHT_FRAC below are this design's choice and can
// be changed together with the weight and sample scaling in software.
// A product data*weight has DATA_FRAC+WEIGHT_FRAC fraction bits. Internal
// results are brought back to the data format by truncation (floor) and the
// final energy by rounding half toward +infinity. Bits above the MSB are
// simply dropped (two's-complement wrap): the formats are sized so that no
// overflow happens for the trained network, so no saturation logic exists.
package rnn_pkg;

  // Network shape: 5 cells, state vector of 8, one output.
  localparam int unsigned N_STATE  = 8;
  localparam int unsigned N_CELLS  = 5;

  // Word widths.
  localparam int unsigned DATA_W      = 19;
  localparam int unsigned WEIGHT_W    = 16;
  localparam int unsigned DATA_FRAC   = 10;  // binary point of data (choice)
  localparam int unsigned WEIGHT_FRAC = 12;  // binary point of weights (choice)
  localparam int unsigned DSP_W       = 37;  // DSP output width in 19x18 mode

  // Multiplexing and array size of the full firmware.
  localparam int unsigned MUX_DEFAULT   = 14;   // channels per network
  localparam int unsigned N_NETWORKS    = 28;
  localparam int unsigned N_CHANNELS    = 384;

  typedef logic signed [DATA_W-1:0]   data_t;
  typedef logic signed [WEIGHT_W-1:0] weight_t;
  typedef logic signed [DSP_W-1:0]    dsp_t;
  typedef data_t   [N_STATE-1:0]      vec_t;      // state / U vectors
  typedef weight_t [N_STATE-1:0]      wvec_t;     // one weight per state lane
  typedef weight_t [N_STATE*N_STATE-1:0] wmat_t;  // R[i][j] at index i*N_STATE+j

  // Per-channel weight address map (one 16-bit weight per address).
  localparam int unsigned WA_R   = 0;                       // 64 recurrent weights
  localparam int unsigned WA_W   = N_STATE*N_STATE;         // 8 kernel weights
  localparam int unsigned WA_B   = WA_W + N_STATE;          // 8 biases
  localparam int unsigned WA_D   = WA_B + N_STATE;          // 8 dense weights
  localparam int unsigned WA_DB  = WA_D + N_STATE;          // dense bias
  localparam int unsigned N_WADDR = WA_DB + 1;              // 89
  localparam int unsigned WADDR_W = $clog2(N_WADDR);

  // Pipeline latencies, in clock cycles, of the units below.
  localparam int unsigned KERNEL_LAT = 2;  // sample in -> U out (weight read + DSP)
  localparam int unsigned FIRST_LAT  = 1;  // U tap -> S1 (ReLU register)
  localparam int unsigned CELL_LAT   = 5;  // S in -> S out for cells 2..5
  localparam int unsigned DENSE_LAT  = 5;  // S5 in -> energy out
  // Newest sample of a window at the network input -> its energy at the output.
  localparam int unsigned NET_LAT = KERNEL_LAT + FIRST_LAT + (N_CELLS-1)*CELL_LAT + DENSE_LAT;

  // Start cycle of cell k (1..5) relative to the U of the newest sample.
  function automatic int unsigned cell_start(input int unsigned k);
    return (k <= 1) ? 0 : FIRST_LAT + (k-2)*CELL_LAT;
  endfunction

  // Delay (cycles) at which cell k finds U of its own window sample,
  // sample k of 5 in time order, when one channel recurs every mux cycles.
  function automatic int unsigned u_tap(input int unsigned k, input int unsigned mux);
    return (N_CELLS-k)*mux + cell_start(k);
  endfunction

  // Product-domain value (DATA_FRAC+WEIGHT_FRAC fraction bits) to data format:
  // truncation toward -infinity, MSBs dropped.
  function automatic data_t trn(input logic signed [47:0] p);
    logic signed [47:0] s;
    s = p >>> WEIGHT_FRAC;
    return s[DATA_W-1:0];
  endfunction

  // Same, rounding half toward +infinity (AC_RND).
  function automatic data_t rnd(input logic signed [47:0] p);
    logic signed [47:0] s;
    s = (p + (48'sd1 <<< (WEIGHT_FRAC-1))) >>> WEIGHT_FRAC;
    return s[DATA_W-1:0];
  endfunction

  // Bias (weight format) aligned to the product domain.
  function automatic logic signed [47:0] bias_to_prod(input weight_t b);
    logic signed [47:0] t;
    t = {{(48-WEIGHT_W){b[WEIGHT_W-1]}}, b};
    return t <<< DATA_FRAC;
  endfunction

endpackage
