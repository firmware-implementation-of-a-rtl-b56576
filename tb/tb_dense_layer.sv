// tb_dense_layer: streams random final states over 3 slots with per-slot
// dense weights and bias, and checks the rounded energy, its slot and valid
// DENSE_LAT cycles later. Counts results where rounding differs from
// truncation, so the rounding path is known to be exercised.
module tb_dense_layer;
  import rnn_pkg::*;
  import rnn_ref_pkg::*;
  localparam int M = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, rounded_up = 0;

  logic rst, in_valid, out_valid;
  logic [1:0] in_ch, rd_ch, out_ch;
  vec_t in_s;
  wvec_t wd;
  weight_t bd;
  data_t out_e;
  wset_t ws [M];

  typedef struct { logic v; int ch; int st [8]; } item_t;
  item_t q [$];

  dense_layer #(.MUX(M)) dut (.clk, .rst, .in_valid, .in_ch, .in_s, .rd_ch, .wd, .bd,
                              .out_valid, .out_ch, .out_e);

  always_ff @(posedge clk) begin
    for (int i = 0; i < 8; i++) wd[i] <= 16'(ws[rd_ch].wd[i]);
    bd <= 16'(ws[rd_ch].bd);
  end

  initial begin
    for (int c = 0; c < M; c++) ws[c] = rand_wset();
    rst = 1; in_valid = 0; in_ch = 0; in_s = '0;
    repeat (3) @(posedge clk); #1;
    rst = 0;
    for (int n = 0; n < 400 + DENSE_LAT; n++) begin
      item_t it;
      it.v = (n < 400) ? 1'($urandom) : 1'b0; it.ch = n % M;
      for (int i = 0; i < 8; i++) it.st[i] = rand_range(0, 1 << 15);
      in_valid = it.v; in_ch = 2'(it.ch);
      for (int i = 0; i < 8; i++) in_s[i] = 19'(it.st[i]);
      q.push_back(it);
      @(posedge clk); #1;
      if (q.size() >= DENSE_LAT) begin
        item_t e;
        longint acc;
        int ex;
        e = q.pop_front();
        ex = ref_dense(ws[e.ch], e.st);
        acc = longint'(ws[e.ch].bd) << DF;
        for (int i = 0; i < 8; i++) acc += longint'(e.st[i]) * ws[e.ch].wd[i];
        if (wrap19(fdiv(acc, WF)) != ex) rounded_up++;
        checks++;
        if (out_valid !== e.v || int'(out_ch) != e.ch || int'(out_e) != ex) begin
          failures++; $display("FAIL n=%0d e=%0d exp=%0d", n, out_e, ex);
        end
      end
    end
    checks++;
    if (rounded_up == 0) begin failures++; $display("FAIL rounding never changed a result"); end
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
