// channel_demux: one-per-clock energies back to one word per channel.
//
// The energies leaving a network carry their slot number. Each is stored in
// the slot's position of a collecting register; when the last slot (MUX-1)
// of a round arrives the whole round is copied to the output registers and
// out_strobe pulses for one cycle. energy_valid[i] is the valid flag that
// came with slot i in that round. Outputs hold until the next round.
// The original firmware's output interface was not published; this one
// is this design's own.
module channel_demux
  import rnn_pkg::*;
#(
  parameter int unsigned MUX  = MUX_DEFAULT,
  localparam int unsigned CH_W = (MUX > 1) ? $clog2(MUX) : 1
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  input  logic [CH_W-1:0] in_ch,
  input  data_t           in_e,
  output logic            out_strobe,
  output logic            energy_valid [MUX],
  output data_t           energy       [MUX]
);
  data_t col_e [MUX];
  logic  col_v [MUX];

  always_ff @(posedge clk) begin
    if (rst) begin
      out_strobe <= 1'b0;
      for (int i = 0; i < MUX; i++) begin
        col_e[i] <= '0; col_v[i] <= 1'b0; energy[i] <= '0; energy_valid[i] <= 1'b0;
      end
    end else begin
      out_strobe <= 1'b0;
      if (32'(in_ch) < MUX) begin
        col_e[in_ch] <= in_e;
        col_v[in_ch] <= in_valid;
      end
      if (32'(in_ch) == MUX-1) begin
        out_strobe <= 1'b1;
        for (int i = 0; i < MUX-1; i++) begin
          energy[i] <= col_e[i]; energy_valid[i] <= col_v[i];
        end
        energy[MUX-1] <= in_e; energy_valid[MUX-1] <= in_valid;
      end
    end
  end
endmodule
