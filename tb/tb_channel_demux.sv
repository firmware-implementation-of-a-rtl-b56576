// tb_channel_demux: streams rounds of MUX slot-tagged energies and checks
// that the parallel outputs hold exactly the round's values and valid flags
// once out_strobe pulses, one cycle after the last slot, and that the strobe
// pulses once per round.
module tb_channel_demux;
  import rnn_pkg::*;
  localparam int M = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst, in_valid, out_strobe;
  logic [2:0] in_ch;
  data_t in_e;
  logic energy_valid [M];
  data_t energy [M];
  data_t ee [M];
  logic  ev [M];
  int strobes = 0;

  channel_demux #(.MUX(M)) dut (.clk, .rst, .in_valid, .in_ch, .in_e,
                                .out_strobe, .energy_valid, .energy);

  always @(posedge clk) if (!rst && out_strobe) strobes++;

  initial begin
    rst = 1; in_valid = 0; in_ch = 0; in_e = 0;
    repeat (3) @(posedge clk); #1;
    rst = 0;
    for (int r = 0; r < 25; r++) begin
      for (int s = 0; s < M; s++) begin
        in_ch = 3'(s); in_e = 19'($urandom); in_valid = 1'($urandom);
        ee[s] = in_e; ev[s] = in_valid;
        @(posedge clk); #1;
        if (s < M-1) begin
          checks++;
          if (out_strobe) begin failures++; $display("FAIL early strobe r%0d s%0d", r, s); end
        end
      end
      in_ch = 0; in_valid = 0; in_e = 0;
      checks++;
      if (!out_strobe) begin failures++; $display("FAIL no strobe round %0d", r); end
      for (int i = 0; i < M; i++) begin
        checks++;
        if (energy[i] !== ee[i] || energy_valid[i] !== ev[i]) begin
          failures++; $display("FAIL round %0d slot %0d", r, i);
        end
      end
    end
    @(posedge clk); #1;
    checks++;
    if (strobes != 25) begin failures++; $display("FAIL strobes=%0d", strobes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
