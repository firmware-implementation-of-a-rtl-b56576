// tb_tap_delay_line: feeds random words and checks that tap i shows the word
// of i+1 cycles before, and that reset clears every tap.
module tb_tap_delay_line;
  localparam int W = 16, D = 7;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst;
  logic [W-1:0] d;
  logic [W-1:0] taps [D];
  logic [W-1:0] hist [$];

  tap_delay_line #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst, .d, .taps);

  initial begin
    rst = 1; d = '1;
    @(posedge clk); @(posedge clk); #1;
    for (int i = 0; i < D; i++) begin
      checks++; if (taps[i] != '0) begin failures++; $display("FAIL reset tap %0d", i); end
    end
    rst = 0;
    for (int n = 0; n < 200; n++) begin
      d = W'($urandom);
      hist.push_front(d);
      @(posedge clk); #1;
      for (int i = 0; i < D; i++) begin
        if (i < hist.size()) begin
          checks++;
          if (taps[i] != hist[i]) begin failures++; $display("FAIL n=%0d tap %0d", n, i); end
        end
      end
      if (hist.size() > D) void'(hist.pop_back());
    end
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
