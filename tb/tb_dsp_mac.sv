// tb_dsp_mac: checks y = a0*b0 + a1*b1 + c one cycle after the operands,
// on random signed operands including the extreme values, and that the
// register holds while en is low.
module tb_dsp_mac;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en;
  logic signed [18:0] a0, a1;
  logic signed [15:0] b0, b1;
  logic signed [36:0] c, y;
  longint exp_q;

  dsp_mac #(.A_W(19), .B_W(16), .Y_W(37)) dut (.clk, .en, .a0, .b0, .a1, .b1, .c, .y);

  function automatic longint ref_mac(input longint x0, input longint w0, input longint x1,
                                     input longint w1, input longint cc);
    return x0*w0 + x1*w1 + cc;
  endfunction

  initial begin
    en = 1;
    for (int n = 0; n < 400; n++) begin
      if (n < 4) begin
        a0 = (n[0]) ? -19'sd262144 : 19'sd262143; b0 = (n[1]) ? -16'sd32768 : 16'sd32767;
        a1 = a0; b1 = b0; c = '0;
      end else begin
        a0 = 19'($urandom); a1 = 19'($urandom); b0 = 16'($urandom); b1 = 16'($urandom);
        c  = 37'(signed'($urandom) >>> 8);
      end
      exp_q = ref_mac(a0, b0, a1, b1, c);
      @(posedge clk); #1;
      checks++;
      if (longint'(y) != exp_q) begin
        failures++;
        $display("FAIL n=%0d y=%0d exp=%0d", n, y, exp_q);
      end
    end
    // hold
    en = 0; a0 = 19'sd5; b0 = 16'sd7; a1 = 0; b1 = 0; c = 0;
    @(posedge clk); #1;
    checks++;
    if (longint'(y) != exp_q) begin failures++; $display("FAIL hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
