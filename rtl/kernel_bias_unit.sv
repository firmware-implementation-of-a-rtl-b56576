// kernel_bias_unit: the input half of an RNN cell, U = W*x + B.
//
// Each incoming sample x (one per clock, tagged with its channel slot) is
// multiplied by the channel's kernel weight vector W and the bias vector B is
// added, giving the N_STATE-wide vector U. The products come from DSPs in
// their dual mode, two independent lanes per DSP (N_STATE/2 DSPs); the bias,
// aligned to the product's binary point, is added in logic at full
// precision and the sum is truncated once to the 19-bit data format. Because U depends only
// on the sample, it is computed here once per sample and reused by all five
// cells instead of being recomputed in each of them.
//
// Interface and timing: in_valid/in_ch/in_x at cycle 0; rd_ch (= in_ch) goes
// to the weight memory, whose W and B arrive at cycle 1; u/u_valid/u_ch are
// valid at cycle 2 (KERNEL_LAT): DSP register, then the bias adder without
// a register of its own.
//
// Computing U once and sharing it, the dual-product DSPs and the bias adder
// in logic follow the original firmware; adding the bias before
// truncation, and the latency, are this design's choices. rd_ch is in_ch itself, so those output bits are a plain wire.
module kernel_bias_unit
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
  output logic [CH_W-1:0] rd_ch,
  input  wvec_t           w,        // kernel weights of rd_ch, one cycle later
  input  wvec_t           b,        // biases of rd_ch, one cycle later
  output logic            u_valid,
  output logic [CH_W-1:0] u_ch,
  output vec_t            u
);
  logic            v1, v2;
  logic [CH_W-1:0] ch1, ch2;
  data_t           x1;
  wvec_t           b2;
  dsp_t            y [N_STATE];

  assign rd_ch = in_ch;

  always_ff @(posedge clk) begin
    if (rst) begin
      v1 <= 1'b0; v2 <= 1'b0; ch1 <= '0; ch2 <= '0; x1 <= '0; b2 <= '0;
    end else begin
      v1 <= in_valid; ch1 <= in_ch; x1 <= in_x;
      v2 <= v1;       ch2 <= ch1;       b2 <= b;
    end
  end

  // Scalar times vector: lanes 2p and 2p+1 share one DSP.
  for (genvar p = 0; p < N_STATE/2; p++) begin : g_dsp
    dsp_mult2 #(.A_W(DATA_W), .B_W(WEIGHT_W), .P_W(DSP_W)) u_dsp (
      .clk, .en(1'b1),
      .a0(x1), .b0(w[2*p]), .a1(x1), .b1(w[2*p+1]),
      .y0(y[2*p]), .y1(y[2*p+1])
    );
  end

  // Bias addition in logic, then truncation.
  for (genvar i = 0; i < N_STATE; i++) begin : g_lane
    logic signed [47:0] sum_p;
    always_comb begin
      sum_p = {{(48-DSP_W){y[i][DSP_W-1]}}, y[i]};
      sum_p = sum_p + bias_to_prod(b2[i]);
      u[i]  = trn(sum_p);
    end
  end

  assign u_valid = v2;
  assign u_ch    = ch2;
endmodule
