// tb_weight_memory: writes random weights into every row and word, then
// reads rows on both ports at once and checks the returned rows one cycle
// after the address, and that writes with an out-of-range word are ignored.
module tb_weight_memory;
  import rnn_pkg::*;
  localparam int DEP = 5, NW = 6, NR = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we;
  logic [2:0] wr_row;
  logic [2:0] wr_word;
  weight_t wr_data;
  logic [2:0] rd_row [NR];
  weight_t [NW-1:0] rd_data [NR];
  int model [DEP][NW];

  weight_memory #(.DEPTH(DEP), .N_WORDS(NW), .N_RD(NR)) dut (
    .clk, .we, .wr_row, .wr_word, .wr_data, .rd_row, .rd_data);

  initial begin
    we = 0; rd_row[0] = 0; rd_row[1] = 0; wr_row = 0; wr_word = 0; wr_data = 0;
    @(posedge clk);
    for (int r = 0; r < DEP; r++)
      for (int w = 0; w < NW; w++) begin
        we = 1; wr_row = 3'(r); wr_word = 3'(w); wr_data = 16'($urandom);
        model[r][w] = int'(wr_data);
        @(posedge clk); #1;
      end
    // out-of-range word: must not touch anything
    we = 1; wr_row = 0; wr_word = 3'd7; wr_data = 16'h1234;
    @(posedge clk); #1;
    we = 0;
    for (int n = 0; n < 60; n++) begin
      int ra, rb;
      ra = int'($urandom % DEP); rb = int'($urandom % DEP);
      rd_row[0] = 3'(ra); rd_row[1] = 3'(rb);
      @(posedge clk); #1;
      for (int w = 0; w < NW; w++) begin
        checks += 2;
        if (int'(rd_data[0][w]) != model[ra][w]) begin failures++; $display("FAIL p0 r%0d w%0d", ra, w); end
        if (int'(rd_data[1][w]) != model[rb][w]) begin failures++; $display("FAIL p1 r%0d w%0d", rb, w); end
      end
    end
    // overwrite one word and read it back
    we = 1; wr_row = 3'd2; wr_word = 3'd4; wr_data = -16'sd77; model[2][4] = -77;
    @(posedge clk); #1; we = 0;
    rd_row[0] = 3'd2;
    @(posedge clk); #1;
    checks++;
    if (int'(rd_data[0][4]) != -77) begin failures++; $display("FAIL overwrite"); end
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
