// tb_rnn_cell: streams random states and U vectors over 3 channel slots,
// each slot with its own recurrent matrix served one cycle after rd_ch, and
// checks S' = ReLU(S x R + U), slot and valid (in_valid AND in_u_valid)
// exactly CELL_LAT cycles later. Counts how many lanes the ReLU clipped.
module tb_rnn_cell;
  import rnn_pkg::*;
  import rnn_ref_pkg::*;
  localparam int M = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, clipped = 0;

  logic rst, in_valid, in_u_valid, out_valid;
  logic [1:0] in_ch, rd_ch, out_ch;
  vec_t in_s, in_u, out_s;
  wmat_t r;
  wset_t ws [M];

  typedef struct { logic v; int ch; int st [8]; int uu [8]; } item_t;
  item_t q [$];

  rnn_cell #(.MUX(M)) dut (.clk, .rst, .in_valid, .in_ch, .in_s, .in_u_valid, .in_u,
                           .rd_ch, .r, .out_valid, .out_ch, .out_s);

  always_ff @(posedge clk) for (int i = 0; i < 64; i++) r[i] <= 16'(ws[rd_ch].r[i]);

  initial begin
    for (int c = 0; c < M; c++) ws[c] = rand_wset();
    rst = 1; in_valid = 0; in_u_valid = 0; in_ch = 0; in_s = '0; in_u = '0;
    repeat (3) @(posedge clk); #1;
    rst = 0;
    for (int n = 0; n < 400 + CELL_LAT; n++) begin
      item_t it;
      logic a, bb;
      a = (n < 400) ? 1'($urandom) : 1'b0; bb = ($urandom % 4) != 0;
      it.v = a & bb; it.ch = n % M;
      for (int i = 0; i < 8; i++) begin
        it.st[i] = rand_range(0, 1 << 13);
        it.uu[i] = rand_range(-(1 << 14), (1 << 14));
      end
      in_valid = a; in_u_valid = bb; in_ch = 2'(it.ch);
      for (int i = 0; i < 8; i++) begin in_s[i] = 19'(it.st[i]); in_u[i] = 19'(it.uu[i]); end
      q.push_back(it);
      @(posedge clk); #1;
      if (q.size() >= CELL_LAT) begin
        item_t e;
        e = q.pop_front();
        checks++;
        if (out_valid !== e.v || int'(out_ch) != e.ch) begin failures++; $display("FAIL tag n=%0d", n); end
        for (int j = 0; j < 8; j++) begin
          longint tv;
          tv = wrap19(longint'(ref_t(ws[e.ch], e.st, j)) + e.uu[j]);
          if (tv <= 0) clipped++;
          checks++;
          if (int'(out_s[j]) != relu(tv)) begin
            failures++; $display("FAIL n=%0d j=%0d s=%0d exp=%0d", n, j, out_s[j], relu(tv));
          end
        end
      end
    end
    checks++;
    if (clipped == 0) begin failures++; $display("FAIL ReLU never clipped"); end
    $display("ReLU clipped %0d lanes", clipped);
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
