// dense_layer: output layer, E = sum_i S5[i] * Wd[i] + Bd.
//
// The state of the fifth cell is reduced to one transverse-energy value with
// the channel's dense weights Wd and bias Bd. Products are paired inside
// four DSPs (the bias enters through the external adder of the first one),
// the pair sums are added at full precision in a two-level tree, and the
// result is rounded (half toward +infinity) once to the 19-bit output
// format. Rounding the output while truncating internal results follows the
// original firmware's choice of quantisation per data category.
//
// Interface and timing: in_* at cycle 0 with rd_ch (= in_ch) to the dense
// weight memory, whose row (Wd[0..7], Bd) arrives at cycle 1; out_* valid at
// cycle DENSE_LAT = 5.
module dense_layer
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
  output logic [CH_W-1:0] rd_ch,
  input  wvec_t           wd,       // dense weights of rd_ch, one cycle later
  input  weight_t         bd,       // dense bias of rd_ch, one cycle later
  output logic            out_valid,
  output logic [CH_W-1:0] out_ch,
  output data_t           out_e
);
  localparam int unsigned NP = N_STATE/2;

  logic               v  [DENSE_LAT];
  logic [CH_W-1:0]    ch [DENSE_LAT];
  vec_t               s1;
  dsp_t               y  [NP];
  logic signed [47:0] l1 [NP/2];
  logic signed [47:0] l2, bias_p;

  assign rd_ch = in_ch;
  always_comb bias_p = bias_to_prod(bd);

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < DENSE_LAT; k++) begin v[k] <= 1'b0; ch[k] <= '0; end
      s1 <= '0;
    end else begin
      v[0] <= in_valid; ch[0] <= in_ch; s1 <= in_s;
      for (int k = 1; k < DENSE_LAT; k++) begin v[k] <= v[k-1]; ch[k] <= ch[k-1]; end
    end
  end

  for (genvar p = 0; p < NP; p++) begin : g_pair
    dsp_mac #(.A_W(DATA_W), .B_W(WEIGHT_W), .Y_W(DSP_W)) u_dsp (
      .clk, .en(1'b1),
      .a0(s1[2*p]),   .b0(wd[2*p]),
      .a1(s1[2*p+1]), .b1(wd[2*p+1]),
      .c((p == 0) ? bias_p[DSP_W-1:0] : '0), .y(y[p])
    );
  end

  always_ff @(posedge clk) begin
    for (int q = 0; q < NP/2; q++) l1[q] <= 48'(y[2*q]) + 48'(y[2*q+1]);
    l2 <= l1[0] + l1[1];
    out_e <= rnd(l2);
  end

  assign out_valid = v[DENSE_LAT-1];
  assign out_ch    = ch[DENSE_LAT-1];

  initial assert (N_STATE == 8 && DENSE_LAT == 5) else $error("dense_layer is written for N_STATE = 8, DENSE_LAT = 5");
endmodule
