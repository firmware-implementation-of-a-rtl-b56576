// rnn_cell: one of the recurrent cells 2..5 of the vanilla RNN.
//
// The cell takes the state S of the previous cell and the vector U = W*x + B
// of its own sample (computed once in the first cell and delivered by the
// delay line), multiplies S by the channel's recurrent matrix R, adds U and
// applies ReLU: S' = ReLU(S x R + U). The sum is in the 19-bit data format
// and wraps on overflow, as the formats are sized so that it does not occur.
//
// Interface and timing: in_* at cycle 0, together with rd_ch (= in_ch) sent
// to a read port of the recurrent weight memory, whose row arrives at cycle 1.
// out_* are valid at cycle CELL_LAT = 5: input register, three cycles of
// matrix product, one cycle for add and ReLU. out_valid is in_valid AND
// in_u_valid, so a window is valid only if all its samples were.
//
// The cell's operations are those of the original network; the pipeline
// and the valid/slot tags are this design's own.
module rnn_cell
  import rnn_pkg::*;
#(
  parameter int unsigned MUX  = MUX_DEFAULT,
  localparam int unsigned CH_W = (MUX > 1) ? $clog2(MUX) : 1
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  input  logic [CH_W-1:0] in_ch,
  input  vec_t            in_s,
  input  logic            in_u_valid,
  input  vec_t            in_u,
  output logic [CH_W-1:0] rd_ch,
  input  wmat_t           r,         // recurrent weights of rd_ch, one cycle later
  output logic            out_valid,
  output logic [CH_W-1:0] out_ch,
  output vec_t            out_s
);
  localparam int unsigned MM_LAT = 3;

  logic            v  [CELL_LAT];
  logic [CH_W-1:0] ch [CELL_LAT];
  vec_t            u  [CELL_LAT-1];
  vec_t            s1, t, tu, sr;

  assign rd_ch = in_ch;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < CELL_LAT; k++) begin v[k] <= 1'b0; ch[k] <= '0; end
      for (int k = 0; k < CELL_LAT-1; k++) u[k] <= '0;
      s1 <= '0;
    end else begin
      v[0] <= in_valid & in_u_valid; ch[0] <= in_ch; u[0] <= in_u; s1 <= in_s;
      for (int k = 1; k < CELL_LAT; k++) begin v[k] <= v[k-1]; ch[k] <= ch[k-1]; end
      for (int k = 1; k < CELL_LAT-1; k++) u[k] <= u[k-1];
    end
  end

  recurrent_matmul u_mm (.clk, .s(s1), .r, .t);

  always_comb begin
    for (int i = 0; i < N_STATE; i++) tu[i] = t[i] + u[MM_LAT][i];
  end

  relu_vec #(.N(N_STATE)) u_relu (.t(tu), .s(sr));

  always_ff @(posedge clk) begin
    if (rst) out_s <= '0;
    else     out_s <= sr;
  end

  assign out_valid = v[CELL_LAT-1];
  assign out_ch    = ch[CELL_LAT-1];

  initial assert (1 + MM_LAT + 1 == CELL_LAT) else $error("CELL_LAT does not match the pipeline");
endmodule
