// tb_first_cell: streams random samples, one per cycle, over 3 channel slots
// that recur every 3 cycles, with occasional invalid samples. Checks at the
// exact cycles given by KERNEL_LAT, FIRST_LAT and cell_start():
//   s1          = ReLU(U(x)) of the oldest sample of each 5-sample window
//   u_cell[k-2] = U of sample k of the window, for cells 2..5
// with valid flags that follow the samples' own flags.
module tb_first_cell;
  import rnn_pkg::*;
  import rnn_ref_pkg::*;
  localparam int M = 3;
  localparam int N = 300;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, clipped = 0;

  logic rst, in_valid, s1_valid;
  logic [1:0] in_ch, kb_rd_ch, s1_ch;
  data_t in_x;
  wvec_t w, b;
  vec_t s1;
  logic u_cell_valid [4];
  vec_t u_cell [4];
  wset_t ws [M];
  int xs [N + 100];
  logic vs [N + 100];

  first_cell #(.MUX(M)) dut (.clk, .rst, .in_valid, .in_ch, .in_x, .kb_rd_ch, .w, .b,
                             .s1_valid, .s1_ch, .s1, .u_cell_valid, .u_cell);

  always_ff @(posedge clk) begin
    for (int i = 0; i < 8; i++) begin
      w[i] <= 16'(ws[kb_rd_ch].w[i]);
      b[i] <= 16'(ws[kb_rd_ch].b[i]);
    end
  end

  initial begin
    for (int c = 0; c < M; c++) ws[c] = rand_wset();
    rst = 1; in_valid = 0; in_ch = 0; in_x = 0;
    repeat (3) @(posedge clk); #1;
    rst = 0;
    for (int i = 0; i < N + 60; i++) begin
      xs[i] = rand_range(-(1 << 14), (1 << 14));
      vs[i] = (i < N) && (($urandom % 10) != 0);
      in_valid = vs[i]; in_ch = 2'(i % M); in_x = 19'(xs[i]);
      @(posedge clk); #1;
      // first cell state
      begin
        int nw, old;
        logic ev;
        nw = i - (KERNEL_LAT + FIRST_LAT - 1);
        old = nw - 4*M;
        ev = (old >= 0) ? vs[old] : 1'b0;
        if (nw >= 0) begin
          checks++;
          if (s1_valid !== ev) begin failures++; $display("FAIL s1_valid i=%0d", i); end
          if (ev) begin
            checks++;
            if (int'(s1_ch) != old % M) begin failures++; $display("FAIL s1_ch i=%0d", i); end
            for (int j = 0; j < 8; j++) begin
              int eu;
              eu = ref_u(ws[old % M], xs[old], j);
              if (eu <= 0) clipped++;
              checks++;
              if (int'(s1[j]) != relu(eu)) begin failures++; $display("FAIL s1 i=%0d j=%0d", i, j); end
            end
          end
        end
      end
      // U handed to cells 2..5
      for (int k = 2; k <= 5; k++) begin
        int nw, smp;
        logic ev;
        nw  = i - (KERNEL_LAT - 1) - int'(cell_start(k));
        smp = nw - (5 - k)*M;
        ev  = (smp >= 0) ? vs[smp] : 1'b0;
        if (nw >= 0) begin
          checks++;
          if (u_cell_valid[k-2] !== ev) begin failures++; $display("FAIL u_valid cell %0d i=%0d", k, i); end
          if (ev) for (int j = 0; j < 8; j++) begin
            checks++;
            if (int'(u_cell[k-2][j]) != ref_u(ws[smp % M], xs[smp], j)) begin
              failures++; $display("FAIL u cell %0d i=%0d j=%0d", k, i, j);
            end
          end
        end
      end
    end
    checks++;
    if (clipped == 0) begin failures++; $display("FAIL ReLU never clipped"); end
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
