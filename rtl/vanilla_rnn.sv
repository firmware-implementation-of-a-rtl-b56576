// vanilla_rnn: one instance of the energy-reconstruction network.
//
// Five RNN cells with an 8-wide state and a dense output layer turn the
// latest five samples of a calorimeter channel into one transverse energy,
// once per sample. The instance is time-multiplexed over MUX channels: it
// takes one sample per clock, the channel slot cycling 0..MUX-1, so the clock
// runs at MUX times the 40 MHz bunch-crossing rate. Each channel has its own
// weights, held in per-network memories indexed by the slot number:
//   kernel/bias memory  (W, B)  - read by the first cell
//   recurrent memory A  (R)     - two read ports, cells 2 and 3
//   recurrent memory B  (R)     - two read ports, cells 4 and 5
//   dense memory        (Wd, Bd)- read by the dense layer
// Both recurrent copies are written together.
//
// Weight loading: cfg_we with cfg_ch (slot), cfg_addr (rnn_pkg WA_* map:
// R[i][j] at i*8+j, W at 64.., B at 72.., Wd at 80.., Bd at 88) and
// cfg_data. Loading may happen while data flows; results of a channel being
// reloaded are undefined until it is complete.
//
// Timing: the energy of the window ending with a given sample leaves NET_LAT
// cycles after that sample entered, tagged with its slot in out_ch; out_valid
// is set only once the channel has seen five valid samples in a row.
//
// Network shape, per-channel weights and the duplicated recurrent memory
// follow the original firmware; the pairing of cells to memory copies, the
// configuration port and its address map are this design's choices.
module vanilla_rnn
  import rnn_pkg::*;
#(
  parameter int unsigned MUX  = MUX_DEFAULT,
  localparam int unsigned CH_W = (MUX > 1) ? $clog2(MUX) : 1
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               in_valid,
  input  logic [CH_W-1:0]    in_ch,
  input  data_t              in_x,
  input  logic               cfg_we,
  input  logic [CH_W-1:0]    cfg_ch,
  input  logic [WADDR_W-1:0] cfg_addr,
  input  weight_t            cfg_data,
  output logic               out_valid,
  output logic [CH_W-1:0]    out_ch,
  output data_t              out_e
);
  localparam int unsigned NREC = N_CELLS - 1;   // cells 2..5

  // ---------------- weight memories ----------------
  logic [CH_W-1:0] kb_rd [1];
  weight_t [2*N_STATE-1:0] kb_row [1];
  logic [CH_W-1:0] ra_rd [2], rb_rd [2];
  wmat_t           ra_row [2], rb_row [2];
  logic [CH_W-1:0] d_rd [1];
  weight_t [N_STATE:0] d_row [1];

  logic we_r, we_k, we_d;
  logic [6:0] a_r, a_k, a_d;
  always_comb begin
    we_r = cfg_we && (32'(cfg_addr) <  WA_W);
    we_k = cfg_we && (32'(cfg_addr) >= WA_W) && (32'(cfg_addr) < WA_D);
    we_d = cfg_we && (32'(cfg_addr) >= WA_D) && (32'(cfg_addr) < N_WADDR);
    a_r  = 7'(cfg_addr);
    a_k  = 7'(32'(cfg_addr) - WA_W);
    a_d  = 7'(32'(cfg_addr) - WA_D);
  end

  weight_memory #(.DEPTH(MUX), .N_WORDS(2*N_STATE), .N_RD(1)) u_kmem (
    .clk, .we(we_k), .wr_row(cfg_ch), .wr_word(a_k[3:0]), .wr_data(cfg_data),
    .rd_row(kb_rd), .rd_data(kb_row));
  weight_memory #(.DEPTH(MUX), .N_WORDS(N_STATE*N_STATE), .N_RD(2)) u_rmem_a (
    .clk, .we(we_r), .wr_row(cfg_ch), .wr_word(a_r[5:0]), .wr_data(cfg_data),
    .rd_row(ra_rd), .rd_data(ra_row));
  weight_memory #(.DEPTH(MUX), .N_WORDS(N_STATE*N_STATE), .N_RD(2)) u_rmem_b (
    .clk, .we(we_r), .wr_row(cfg_ch), .wr_word(a_r[5:0]), .wr_data(cfg_data),
    .rd_row(rb_rd), .rd_data(rb_row));
  weight_memory #(.DEPTH(MUX), .N_WORDS(N_STATE+1), .N_RD(1)) u_dmem (
    .clk, .we(we_d), .wr_row(cfg_ch), .wr_word(a_d[3:0]), .wr_data(cfg_data),
    .rd_row(d_rd), .rd_data(d_row));

  // ---------------- first cell ----------------
  wvec_t w_k, b_k;
  always_comb begin
    for (int i = 0; i < N_STATE; i++) begin
      w_k[i] = kb_row[0][i];
      b_k[i] = kb_row[0][N_STATE+i];
    end
  end

  logic            sv [N_CELLS];
  logic [CH_W-1:0] sc [N_CELLS];
  vec_t            ss [N_CELLS];
  logic            ucv [NREC];
  vec_t            uc  [NREC];

  first_cell #(.MUX(MUX)) u_first (
    .clk, .rst, .in_valid, .in_ch, .in_x,
    .kb_rd_ch(kb_rd[0]), .w(w_k), .b(b_k),
    .s1_valid(sv[0]), .s1_ch(sc[0]), .s1(ss[0]),
    .u_cell_valid(ucv), .u_cell(uc)
  );

  // ---------------- cells 2..5 ----------------
  logic [CH_W-1:0] rd_ch [NREC];
  wmat_t           r_in  [NREC];

  always_comb begin
    ra_rd[0] = rd_ch[0]; ra_rd[1] = rd_ch[1];
    rb_rd[0] = rd_ch[2]; rb_rd[1] = rd_ch[3];
    r_in[0]  = ra_row[0]; r_in[1] = ra_row[1];
    r_in[2]  = rb_row[0]; r_in[3] = rb_row[1];
  end

  for (genvar c = 0; c < NREC; c++) begin : g_cell
    rnn_cell #(.MUX(MUX)) u_cell (
      .clk, .rst,
      .in_valid(sv[c]), .in_ch(sc[c]), .in_s(ss[c]),
      .in_u_valid(ucv[c]), .in_u(uc[c]),
      .rd_ch(rd_ch[c]), .r(r_in[c]),
      .out_valid(sv[c+1]), .out_ch(sc[c+1]), .out_s(ss[c+1])
    );
  end

  // ---------------- dense layer ----------------
  wvec_t wd;
  always_comb for (int i = 0; i < N_STATE; i++) wd[i] = d_row[0][i];

  dense_layer #(.MUX(MUX)) u_dense (
    .clk, .rst,
    .in_valid(sv[N_CELLS-1]), .in_ch(sc[N_CELLS-1]), .in_s(ss[N_CELLS-1]),
    .rd_ch(d_rd[0]), .wd, .bd(d_row[0][N_STATE]),
    .out_valid, .out_ch, .out_e
  );
endmodule
