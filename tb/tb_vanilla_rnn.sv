// tb_vanilla_rnn: one network instance multiplexed over 4 channel slots.
// Loads a different random weight set into every slot through the
// configuration port, streams random samples one per cycle (some invalid),
// and checks every energy against the integer reference of the 5-sample
// window, at exactly NET_LAT cycles after the window's newest sample, with
// out_valid set only when all five samples of the window were valid.
module tb_vanilla_rnn;
  import rnn_pkg::*;
  import rnn_ref_pkg::*;
  localparam int M = 4;
  localparam int N = 400;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_valid = 0, n_invalid = 0;

  logic rst, in_valid, cfg_we, out_valid;
  logic [1:0] in_ch, cfg_ch, out_ch;
  logic [WADDR_W-1:0] cfg_addr;
  weight_t cfg_data;
  data_t in_x, out_e;
  wset_t ws [M];
  int xs [N + 100];
  logic vs [N + 100];

  vanilla_rnn #(.MUX(M)) dut (.clk, .rst, .in_valid, .in_ch, .in_x,
                              .cfg_we, .cfg_ch, .cfg_addr, .cfg_data,
                              .out_valid, .out_ch, .out_e);

  initial begin
    rst = 1; in_valid = 0; in_ch = 0; in_x = 0; cfg_we = 0; cfg_ch = 0; cfg_addr = 0; cfg_data = 0;
    repeat (3) @(posedge clk); #1;
    rst = 0;
    for (int c = 0; c < M; c++) begin
      ws[c] = rand_wset();
      for (int a = 0; a < int'(N_WADDR); a++) begin
        cfg_we = 1; cfg_ch = 2'(c); cfg_addr = WADDR_W'(a); cfg_data = 16'(wset_word(ws[c], a));
        @(posedge clk); #1;
      end
    end
    cfg_we = 0;
    for (int i = 0; i < N + 60; i++) begin
      xs[i] = rand_range(-(1 << 13), (1 << 14));
      vs[i] = (i < N) && (($urandom % 25) != 0);
      in_valid = vs[i]; in_ch = 2'(i % M); in_x = 19'(xs[i]);
      @(posedge clk); #1;
      begin
        int nw;
        logic ev;
        int win [5];
        nw = i - int'(NET_LAT) + 1;
        if (nw >= 0) begin
          ev = 1'b1;
          for (int k = 0; k < 5; k++) begin
            int idx;
            idx = nw - (4 - k)*M;
            if (idx < 0) ev = 1'b0; else begin ev &= vs[idx]; win[k] = xs[idx]; end
          end
          checks++;
          if (out_valid !== ev || (ev && int'(out_ch) != nw % M)) begin
            failures++; $display("FAIL tag i=%0d v=%0b exp=%0b", i, out_valid, ev);
          end
          if (ev) begin
            int ex;
            ex = ref_energy(ws[nw % M], win);
            n_valid++;
            checks++;
            if (int'(out_e) != ex) begin failures++; $display("FAIL i=%0d e=%0d exp=%0d", i, out_e, ex); end
          end else n_invalid++;
        end
      end
    end
    $display("windows checked: %0d valid, %0d invalid", n_valid, n_invalid);
    checks++;
    if (n_valid < 100 || n_invalid == 0) begin failures++; $display("FAIL coverage"); end
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
