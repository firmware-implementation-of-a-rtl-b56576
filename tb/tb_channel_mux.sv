// tb_channel_mux: gives a strobe every MUX cycles with random samples and
// checks that slot s of each round leaves s+1 cycles after the strobe with
// its slot number and the round's valid flag, that the stream has no gaps,
// and that the output goes invalid with slot 0 when strobes stop.
module tb_channel_mux;
  import rnn_pkg::*;
  localparam int M = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst, bc_strobe, bc_valid, out_valid;
  data_t samples [M];
  logic [2:0] out_ch;
  data_t out_x;
  data_t exp_x [M];
  logic exp_v;

  channel_mux #(.MUX(M)) dut (.clk, .rst, .bc_strobe, .bc_valid, .samples,
                              .out_valid, .out_ch, .out_x);

  initial begin
    rst = 1; bc_strobe = 0; bc_valid = 0;
    for (int i = 0; i < M; i++) samples[i] = '0;
    repeat (3) @(posedge clk); #1;
    rst = 0;
    checks++; if (out_valid) begin failures++; $display("FAIL valid after reset"); end
    for (int r = 0; r < 30; r++) begin
      // strobe cycle
      bc_strobe = 1; bc_valid = (r % 4 != 3);
      for (int i = 0; i < M; i++) begin samples[i] = 19'($urandom); exp_x[i] = samples[i]; end
      exp_v = bc_valid;
      for (int s = 0; s < M; s++) begin
        @(posedge clk); #1;
        bc_strobe = 0;
        for (int i = 0; i < M; i++) samples[i] = 19'($urandom);   // must not leak
        if (s == M-1 && r != 29) begin
          // next strobe is driven in the same cycle as the last slot
        end
        checks++;
        if (out_valid !== exp_v || int'(out_ch) != s || out_x !== exp_x[s]) begin
          failures++;
          $display("FAIL round %0d slot %0d: v=%0b ch=%0d x=%0d exp %0b %0d", r, s, out_valid, out_ch, out_x, exp_v, exp_x[s]);
        end
      end
    end
    // no strobe any more: idle
    @(posedge clk); #1;
    checks++;
    if (out_valid || out_ch != 0) begin failures++; $display("FAIL idle"); end
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
