// first_cell: first RNN cell plus the input computation shared by all cells.
//
// A window is the five latest samples of one channel, x(t-4) .. x(t), taken
// in time order: cell k works on sample k, so the first cell sees the oldest
// one. The part of a cell that depends only on its sample, U = W*x + B, is
// the same for a given sample whichever cell and window it serves, so it is
// computed once, when the sample arrives (kernel_bias_unit), and kept in a
// tapped delay line. Each cell then takes the U it needs from the tap whose
// delay is (5-k)*MUX cycles (the sample is 5-k bunch crossings old, and the
// channel recurs every MUX cycles) plus the cycle at which cell k starts.
// The first cell itself has no previous state and no recurrent product:
// S1 = ReLU(U(x(t-4))).
//
// Interface and timing: one sample per clock (in_valid/in_ch/in_x); the
// channel of a slot must recur exactly every MUX cycles, which channel_mux
// guarantees and an assertion checks. kb_rd_ch addresses the kernel/bias
// memory, whose row arrives one cycle later. With c0 the cycle at which U
// of the newest sample leaves the kernel unit (KERNEL_LAT after the input),
// s1 is valid at c0 + FIRST_LAT and u_cell[k-2] carries the U for cell k at
// c0 + cell_start(k), the cycle at which cell k receives its state.
//
// Reusing U across cells and leaving out the first cell's recurrent
// product follow the original firmware. The flip-flop delay line, the tap
// arithmetic and the mapping of cell 1 to the oldest sample are this
// design's choices.
module first_cell
  import rnn_pkg::*;
#(
  parameter int unsigned MUX  = MUX_DEFAULT,
  localparam int unsigned CH_W = (MUX > 1) ? $clog2(MUX) : 1
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  input  logic [CH_W-1:0] in_ch,
  input  data_t           in_x,
  output logic [CH_W-1:0] kb_rd_ch,
  input  wvec_t           w,
  input  wvec_t           b,
  output logic            s1_valid,
  output logic [CH_W-1:0] s1_ch,
  output vec_t            s1,
  output logic            u_cell_valid [N_CELLS-1],
  output vec_t            u_cell       [N_CELLS-1]
);
  localparam int unsigned VW = $bits(vec_t);
  localparam int unsigned DW = 1 + CH_W + VW;     // {valid, ch, U}

  function automatic int unsigned max_tap();
    int unsigned m = 1;
    for (int unsigned k = 1; k <= N_CELLS; k++) if (u_tap(k, MUX) > m) m = u_tap(k, MUX);
    return m;
  endfunction
  localparam int unsigned DEPTH = max_tap();

  logic            u_valid;
  logic [CH_W-1:0] u_ch;
  vec_t            u;
  logic [DW-1:0]   taps [DEPTH];

  kernel_bias_unit #(.MUX(MUX)) u_kb (
    .clk, .rst, .in_valid, .in_ch, .in_x,
    .rd_ch(kb_rd_ch), .w, .b,
    .u_valid, .u_ch, .u
  );

  tap_delay_line #(.WIDTH(DW), .DEPTH(DEPTH)) u_dl (
    .clk, .rst, .d({u_valid, u_ch, u}), .taps
  );

  // Word seen by cell k: its tap, or the fresh U when the delay is 0.
  function automatic logic [DW-1:0] tap_of(input int unsigned k, input logic [DW-1:0] fresh,
                                           input logic [DW-1:0] tp [DEPTH]);
    int unsigned d = u_tap(k, MUX);
    return (d == 0) ? fresh : tp[d-1];
  endfunction

  // Cell 1: ReLU of the oldest sample's U.
  logic [DW-1:0]   w1;
  vec_t            r1;
  always_comb w1 = tap_of(1, {u_valid, u_ch, u}, taps);
  relu_vec #(.N(N_STATE)) u_relu (.t(w1[VW-1:0]), .s(r1));

  always_ff @(posedge clk) begin
    if (rst) begin
      s1_valid <= 1'b0; s1_ch <= '0; s1 <= '0;
    end else begin
      s1_valid <= w1[DW-1];
      s1_ch    <= u_ch;          // equal to the tap's slot, see assertion
      s1       <= r1;
    end
  end

  for (genvar k = 2; k <= N_CELLS; k++) begin : g_tap
    logic [DW-1:0] wk;
    always_comb wk = tap_of(k, {u_valid, u_ch, u}, taps);
    assign u_cell_valid[k-2] = wk[DW-1];
    assign u_cell[k-2]       = wk[VW-1:0];
  end

  // The channel in each tap must be the one of the slot being processed.
  always_ff @(posedge clk) begin
    if (!rst && u_valid && w1[DW-1])
      assert (w1[VW +: CH_W] == u_ch)
        else $error("first_cell: channel slots do not recur every MUX cycles");
  end

  initial assert (FIRST_LAT == 1) else $error("first_cell is written for FIRST_LAT = 1");
endmodule
