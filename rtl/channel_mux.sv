// channel_mux: bunch-crossing-parallel samples to a one-per-clock stream.
//
// Once per bunch crossing (bc_strobe, one cycle long, every MUX cycles of the
// fast clock) the MUX samples of the channels served by one network are
// captured, together with a common valid flag. During the next MUX cycles
// they leave one per cycle, slot 0 first, each tagged with its slot number.
// With strobes exactly MUX cycles apart the output is a gap-free stream in
// which every slot recurs every MUX cycles, as the network requires; an
// assertion flags strobes at any other spacing. Between rounds (no strobe
// in time) the output is invalid and the slot number rests at 0.
// Multiplexing 14 channels onto one network at 14 x 40 MHz follows the
// original firmware; this interface (strobe, capture, slot order) is this
// design's own.
module channel_mux
  import rnn_pkg::*;
#(
  parameter int unsigned MUX  = MUX_DEFAULT,
  localparam int unsigned CH_W = (MUX > 1) ? $clog2(MUX) : 1
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            bc_strobe,
  input  logic            bc_valid,
  input  data_t           samples [MUX],
  output logic            out_valid,
  output logic [CH_W-1:0] out_ch,
  output data_t           out_x
);
  data_t           buf_q [MUX];
  logic            buf_v, active;
  logic [CH_W-1:0] cnt;
  logic            last;

  assign last = (32'(cnt) == MUX-1);

  always_ff @(posedge clk) begin
    if (rst) begin
      active <= 1'b0; buf_v <= 1'b0; cnt <= '0;
      for (int i = 0; i < MUX; i++) buf_q[i] <= '0;
    end else if (bc_strobe) begin
      for (int i = 0; i < MUX; i++) buf_q[i] <= samples[i];
      buf_v  <= bc_valid;
      active <= 1'b1;
      cnt    <= '0;
    end else if (active) begin
      if (last) begin
        active <= 1'b0;
        cnt    <= '0;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

  assign out_valid = active & buf_v;
  assign out_ch    = cnt;
  assign out_x     = buf_q[cnt];

  always_ff @(posedge clk) begin
    if (!rst && bc_strobe && active)
      assert (last) else $error("channel_mux: bunch-crossing strobe not MUX cycles after the previous one");
  end
endmodule
