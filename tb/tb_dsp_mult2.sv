// tb_dsp_mult2: checks y0 = a0*b0 and y1 = a1*b1 one cycle after the
// operands on random and extreme signed operands, and that the registers
// hold while en is low.
module tb_dsp_mult2;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en;
  logic signed [18:0] a0, a1;
  logic signed [15:0] b0, b1;
  logic signed [36:0] y0, y1;
  longint e0, e1;

  dsp_mult2 #(.A_W(19), .B_W(16), .P_W(37)) dut (.clk, .en, .a0, .b0, .a1, .b1, .y0, .y1);

  initial begin
    en = 1;
    for (int n = 0; n < 400; n++) begin
      if (n < 4) begin
        a0 = (n[0]) ? -19'sd262144 : 19'sd262143; b0 = (n[1]) ? -16'sd32768 : 16'sd32767;
        a1 = -a0; b1 = b0;
      end else begin
        a0 = 19'($urandom); a1 = 19'($urandom); b0 = 16'($urandom); b1 = 16'($urandom);
      end
      e0 = longint'(a0) * longint'(b0);
      e1 = longint'(a1) * longint'(b1);
      @(posedge clk); #1;
      checks += 2;
      if (longint'(y0) != e0) begin failures++; $display("FAIL n=%0d y0=%0d exp=%0d", n, y0, e0); end
      if (longint'(y1) != e1) begin failures++; $display("FAIL n=%0d y1=%0d exp=%0d", n, y1, e1); end
    end
    en = 0; a0 = 19'sd5; b0 = 16'sd7; a1 = 19'sd3; b1 = 16'sd2;
    @(posedge clk); #1;
    checks++;
    if (longint'(y0) != e0 || longint'(y1) != e1) begin failures++; $display("FAIL hold"); end
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
