// dsp_mult2: model of one FPGA DSP block in its dual 19x18 fixed-point mode:
// two independent signed products, y0 = a0*b0 and y1 = a1*b1, each with its
// own registered output. This is the mode that doubles the number of
// multipliers of the device and that the original firmware uses throughout;
// here it serves the kernel-weight products, where each product goes to a
// different state lane and the DSP's internal sum cannot be used.
//
// Interface: a0/a1 data operands (A_W bits), b0/b1 weight operands (B_W
// bits). Timing: one register stage (this design's choice), y0/y1 valid
// one cycle after the operands; en holds the registers when low.
module dsp_mult2 #(
  parameter int unsigned A_W = 19,
  parameter int unsigned B_W = 16,
  parameter int unsigned P_W = 37
) (
  input  logic                  clk,
  input  logic                  en,
  input  logic signed [A_W-1:0] a0,
  input  logic signed [B_W-1:0] b0,
  input  logic signed [A_W-1:0] a1,
  input  logic signed [B_W-1:0] b1,
  output logic signed [P_W-1:0] y0,
  output logic signed [P_W-1:0] y1
);
  logic signed [P_W-1:0] p0, p1;

  // Operands are sign-extended to P_W bits by the assignment context.
  always_comb begin
    p0 = a0 * b0;
    p1 = a1 * b1;
  end

  always_ff @(posedge clk) begin
    if (en) begin
      y0 <= p0;
      y1 <= p1;
    end
  end
endmodule
