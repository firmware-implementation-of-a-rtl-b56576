// dsp_mac: model of one FPGA DSP block used in its 19x18 fixed-point mode.
//
// The block forms two signed products and adds them inside the DSP, then adds
// an external addend, and registers the result: y = a0*b0 + a1*b1 + c.
// Using the internal sum halves the number of adders that have to be built
// in logic, which is how the original firmware uses its DSPs. The external
// addend is the DSP's chain/accumulate input; here it carries the bias.
//
// Interface: a0/a1 are data operands (A_W bits), b0/b1 weight operands (B_W
// bits), c the addend (Y_W bits). Timing: one register, y is valid one cycle
// after the operands. The enable en holds the register when low. The
// single register stage is this design's choice; the vendor DSP can have
// more.
module dsp_mac #(
  parameter int unsigned A_W = 19,
  parameter int unsigned B_W = 16,
  parameter int unsigned Y_W = 37
) (
  input  logic                  clk,
  input  logic                  en,
  input  logic signed [A_W-1:0] a0,
  input  logic signed [B_W-1:0] b0,
  input  logic signed [A_W-1:0] a1,
  input  logic signed [B_W-1:0] b1,
  input  logic signed [Y_W-1:0] c,
  output logic signed [Y_W-1:0] y
);
  logic signed [Y_W-1:0] p0, p1, sum;

  // Operands are sign-extended to Y_W bits by the assignment context.
  always_comb begin
    p0  = a0 * b0;
    p1  = a1 * b1;
    sum = p0 + p1 + c;
  end

  always_ff @(posedge clk) begin
    if (en) y <= sum;
  end
endmodule
