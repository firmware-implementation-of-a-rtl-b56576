// tb_kernel_bias_unit: streams random samples over 3 channel slots, each
// with its own random kernel weights and biases served one cycle after
// rd_ch (as the weight memory does), and checks U = W*x + B truncated to the
// data format, its slot and valid flag, exactly KERNEL_LAT cycles later.
module tb_kernel_bias_unit;
  import rnn_pkg::*;
  import rnn_ref_pkg::*;
  localparam int M = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst, in_valid, u_valid;
  logic [1:0] in_ch, rd_ch, u_ch;
  data_t in_x;
  wvec_t w, b;
  vec_t u;
  wset_t ws [M];

  typedef struct { logic v; int ch; int x; } item_t;
  item_t q [$];

  kernel_bias_unit #(.MUX(M)) dut (.clk, .rst, .in_valid, .in_ch, .in_x, .rd_ch,
                                   .w, .b, .u_valid, .u_ch, .u);

  // weight memory model: registered read
  always_ff @(posedge clk) begin
    for (int i = 0; i < 8; i++) begin
      w[i] <= 16'(ws[rd_ch].w[i]);
      b[i] <= 16'(ws[rd_ch].b[i]);
    end
  end

  initial begin
    for (int c = 0; c < M; c++) ws[c] = rand_wset();
    rst = 1; in_valid = 0; in_ch = 0; in_x = 0;
    repeat (3) @(posedge clk); #1;
    rst = 0;
    for (int n = 0; n < 300 + KERNEL_LAT; n++) begin
      item_t it;
      it.v = (n < 300) ? 1'($urandom) : 1'b0;
      it.ch = n % M;
      it.x = (n % 17 == 0) ? -262144 : rand_range(-(1 << 16), (1 << 16));
      in_valid = it.v; in_ch = 2'(it.ch); in_x = 19'(it.x);
      q.push_back(it);
      @(posedge clk); #1;
      if (q.size() >= KERNEL_LAT) begin
        item_t e;
        e = q.pop_front();
        checks++;
        if (u_valid !== e.v || int'(u_ch) != e.ch) begin
          failures++; $display("FAIL tag n=%0d", n);
        end
        for (int i = 0; i < 8; i++) begin
          checks++;
          if (int'(u[i]) != ref_u(ws[e.ch], e.x, i)) begin
            failures++; $display("FAIL n=%0d lane %0d u=%0d exp=%0d", n, i, u[i], ref_u(ws[e.ch], e.x, i));
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
