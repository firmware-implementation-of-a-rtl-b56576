// tb_recurrent_matmul: applies a new random state vector and matrix every
// cycle and checks T = S x R (pair sums truncated, 19-bit adds) 3 cycles
// later, including large operands that make the 19-bit sums wrap.
module tb_recurrent_matmul;
  import rnn_pkg::*;
  import rnn_ref_pkg::*;
  localparam int LAT = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  vec_t s, t;
  wmat_t r;
  typedef struct { int st [8]; wset_t w; } item_t;
  item_t q [$];

  recurrent_matmul dut (.clk, .s, .r, .t);

  initial begin
    for (int n = 0; n < 300 + LAT; n++) begin
      item_t it;
      it.w = rand_wset();
      if (n % 10 == 9) for (int i = 0; i < 64; i++) it.w.r[i] = rand_range(-32768, 32767);
      for (int i = 0; i < 8; i++) it.st[i] = (n % 10 == 9) ? rand_range(-262144, 262143) : rand_range(0, 1 << 14);
      for (int i = 0; i < 8; i++) s[i] = 19'(it.st[i]);
      for (int i = 0; i < 64; i++) r[i] = 16'(it.w.r[i]);
      q.push_back(it);
      @(posedge clk); #1;
      if (q.size() >= LAT) begin
        item_t e;
        e = q.pop_front();
        for (int j = 0; j < 8; j++) begin
          checks++;
          if (int'(t[j]) != ref_t(e.w, e.st, j)) begin
            failures++; $display("FAIL n=%0d j=%0d t=%0d exp=%0d", n, j, t[j], ref_t(e.w, e.st, j));
          end
        end
      end
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
