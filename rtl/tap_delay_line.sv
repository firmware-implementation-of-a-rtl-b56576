// tap_delay_line: shift register of DEPTH stages that exposes every stage.
//
// taps[i] holds the input word as it was i+1 clock cycles ago. The RNN uses
// it to hand the kernel-and-bias result U of each sample, computed once in the
// first cell, to the later cells: a cell picks the tap whose delay equals the
// time between the arrival of its sample and the cycle at which it starts.
// The original firmware builds such delays in memory blocks below 450 MHz
// and in flip-flops above; this one is flip-flops only.
//
// Interface: d enters every cycle (no enable); rst clears all stages
// synchronously, so valid flags carried inside the word start cleared.
// Building the delays from flip-flops rather than memory is this design's
// choice.
module tap_delay_line #(
  parameter int unsigned WIDTH = 153,
  parameter int unsigned DEPTH = 63
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] taps [DEPTH]
);
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < DEPTH; i++) taps[i] <= '0;
    end else begin
      taps[0] <= d;
      for (int i = 1; i < DEPTH; i++) taps[i] <= taps[i-1];
    end
  end
endmodule
