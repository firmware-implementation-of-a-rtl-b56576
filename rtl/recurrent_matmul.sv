// recurrent_matmul: state vector times recurrent kernel matrix, T = S x R.
//
// T[j] = sum_i S[i] * R[i][j] for an N_STATE-wide state. Each output lane
// uses N_STATE/2 DSPs that each form the sum of two products inside the DSP;
// the pair sums are truncated to the 19-bit data format and added in a
// two-level adder tree built in logic. This is the non-chained arrangement:
// DSP cascades would need input delay lines that cost more logic than the
// adders at the high clock rates the network runs at.
//
// Interface: s and r sampled at cycle 0, t valid at cycle 3 (DSP register and
// two adder registers). No enable; the surrounding cell carries the valid
// flag. R is flattened as r[i*N_STATE+j]. Written for N_STATE = 8 (four pair
// sums per lane); other sizes must be a multiple of 4.
//
// Pairing products in DSPs and adding in logic follows the original
// firmware; truncating each pair sum to 19 bits, the orientation of R and
// the pipeline depth are this design's choices.
module recurrent_matmul
  import rnn_pkg::*;
(
  input  logic  clk,
  input  vec_t  s,
  input  wmat_t r,
  output vec_t  t
);
  localparam int unsigned NP = N_STATE/2;   // DSPs per output lane

  for (genvar j = 0; j < N_STATE; j++) begin : g_col
    dsp_t  y  [NP];
    data_t ps [NP];
    data_t l1 [NP/2];

    for (genvar p = 0; p < NP; p++) begin : g_pair
      dsp_mac #(.A_W(DATA_W), .B_W(WEIGHT_W), .Y_W(DSP_W)) u_dsp (
        .clk, .en(1'b1),
        .a0(s[2*p]),   .b0(r[(2*p)*N_STATE + j]),
        .a1(s[2*p+1]), .b1(r[(2*p+1)*N_STATE + j]),
        .c('0), .y(y[p])
      );
      always_comb ps[p] = trn(y[p]);
    end

    always_ff @(posedge clk) begin
      for (int q = 0; q < NP/2; q++) l1[q] <= ps[2*q] + ps[2*q+1];
    end

    always_ff @(posedge clk) begin
      t[j] <= l1[0] + l1[1];
    end
  end

  initial assert (N_STATE == 8) else $error("recurrent_matmul tree is written for N_STATE = 8");
endmodule
