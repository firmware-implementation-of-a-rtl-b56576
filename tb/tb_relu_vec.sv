// tb_relu_vec: checks the element-wise ReLU on random vectors and on the
// corner values 0, -1, +1 and the most negative/positive 19-bit numbers.
module tb_relu_vec;
  import rnn_pkg::*;
  int checks = 0, failures = 0;
  vec_t t, s;
  int v;

  relu_vec #(.N(8)) dut (.t, .s);

  initial begin
    for (int n = 0; n < 300; n++) begin
      for (int i = 0; i < 8; i++) begin
        case ((n + i) % 12)
          0: t[i] = 19'sd0;
          1: t[i] = -19'sd1;
          2: t[i] = 19'sd1;
          3: t[i] = -19'sd262144;
          4: t[i] = 19'sd262143;
          default: t[i] = 19'($urandom);
        endcase
      end
      #1;
      for (int i = 0; i < 8; i++) begin
        v = int'(t[i]);
        checks++;
        if (int'(s[i]) != ((v > 0) ? v : 0)) begin
          failures++; $display("FAIL t=%0d s=%0d", t[i], s[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
