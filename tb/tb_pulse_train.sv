// tb_pulse_train: one network at its default multiplexing (14 channels)
// fed with calorimeter-like sample trains instead of white noise.
//
// For each channel and bunch crossing a hard deposit of 0..5 GeV occurs
// with probability 1/30 and a pile-up deposit of 0..0.2 GeV with
// probability 0.3. Every deposit adds E * g(k) to the samples k = 0..24
// crossings later, where g is a bipolar shape with a positive lobe peaking
// at k = 2 and a small, long undershoot:
//   g(k) = (k/2)^2 exp(2-k) - 0.1 (k/8) exp(1-k/8)
// plus a uniform noise of +-20 MeV per sample. Samples are in GeV with 10
// fraction bits. The shape is a stand-in for the real shaper response.
// Weights are random; every energy is compared with the integer
// reference, and the test fails unless some windows contain a hard deposit.
module tb_pulse_train;
  import rnn_pkg::*;
  import rnn_ref_pkg::*;
  localparam int M = MUX_DEFAULT;
  localparam int NBC = 600;
  localparam int NPULSE = 25;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_hard = 0, n_valid = 0;

  logic rst, in_valid, cfg_we, out_valid;
  logic [3:0] in_ch, cfg_ch, out_ch;
  logic [WADDR_W-1:0] cfg_addr;
  weight_t cfg_data;
  data_t in_x, out_e;
  wset_t ws [M];
  real   g [NPULSE];
  real   acc [NBC + NPULSE][M];
  int    xs [NBC][M];
  logic  hard [NBC][M];

  vanilla_rnn dut (.clk, .rst, .in_valid, .in_ch, .in_x,
                   .cfg_we, .cfg_ch, .cfg_addr, .cfg_data,
                   .out_valid, .out_ch, .out_e);

  function automatic real urand();   // 0 .. 1
    return real'($urandom % 1000000) / 1000000.0;
  endfunction

  initial begin
    for (int k = 0; k < NPULSE; k++)
      g[k] = (k / 2.0) ** 2 * $exp(2.0 - k) - 0.1 * (k / 8.0) * $exp(1.0 - k / 8.0);
    for (int b = 0; b < NBC + NPULSE; b++) for (int c = 0; c < M; c++) acc[b][c] = 0.0;
    for (int b = 0; b < NBC; b++)
      for (int c = 0; c < M; c++) begin
        real e;
        e = 0.0;
        hard[b][c] = ($urandom % 30) == 0;
        if (hard[b][c]) e += 5.0 * urand();
        if (($urandom % 10) < 3) e += 0.2 * urand();
        for (int k = 0; k < NPULSE; k++) acc[b+k][c] += e * g[k];
      end
    for (int b = 0; b < NBC; b++)
      for (int c = 0; c < M; c++)
        xs[b][c] = $rtoi((acc[b][c] + 0.04 * (urand() - 0.5)) * 1024.0);

    rst = 1; in_valid = 0; in_ch = 0; in_x = 0; cfg_we = 0; cfg_ch = 0; cfg_addr = 0; cfg_data = 0;
    repeat (3) @(posedge clk); #1;
    rst = 0;
    for (int c = 0; c < M; c++) begin
      ws[c] = rand_wset();
      for (int a = 0; a < int'(N_WADDR); a++) begin
        cfg_we = 1; cfg_ch = 4'(c); cfg_addr = WADDR_W'(a); cfg_data = 16'(wset_word(ws[c], a));
        @(posedge clk); #1;
      end
    end
    cfg_we = 0;
    for (int i = 0; i < NBC * M + int'(NET_LAT); i++) begin
      int nw;
      in_valid = (i < NBC * M); in_ch = 4'(i % M);
      in_x = (i < NBC * M) ? 19'(xs[i / M][i % M]) : '0;
      @(posedge clk); #1;
      nw = i - int'(NET_LAT) + 1;
      if (nw >= 0 && nw < NBC * M) begin
        int b, c;
        logic ev;
        b = nw / M; c = nw % M;
        ev = (b >= 4);
        checks++;
        if (out_valid !== ev || (ev && int'(out_ch) != c)) begin
          failures++; $display("FAIL tag bc %0d ch %0d", b, c);
        end
        if (ev) begin
          int win [5];
          int ex;
          for (int k = 0; k < 5; k++) win[k] = xs[b-4+k][c];
          ex = ref_energy(ws[c], win);
          n_valid++;
          if (hard[b-3][c]) n_hard++;
          checks++;
          if (int'(out_e) != ex) begin
            failures++; $display("FAIL bc %0d ch %0d e=%0d exp=%0d", b, c, out_e, ex);
          end
        end
      end
    end
    $display("windows %0d, with a hard deposit at the second sample %0d", n_valid, n_hard);
    checks++;
    if (n_hard == 0) begin failures++; $display("FAIL no hard deposit seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NBC * M + 2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
