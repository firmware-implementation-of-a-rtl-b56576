// weight_memory: per-channel weight store of one network.
//
// Every multiplexed channel has its own trained weights, so the memory holds
// one row per channel slot (DEPTH rows) of N_WORDS 16-bit weights. Software
// loads it one weight at a time through the write port (we, wr_row, wr_word,
// wr_data). N_RD read ports each return a whole row, one cycle after the row
// address is presented, so a cell can fetch all weights of the channel it
// is about to process in a single cycle. The recurrent matrix is kept in two
// such memories with two read ports each, one copy shared by cells 2 and 3,
// the other by cells 4 and 5, which mirrors the duplication of the recurrent
// weights next to the cells in the original placement. Contents are not
// reset. One row per channel follows the original firmware; the register
// array (instead of on-chip RAM blocks), the row-wide read and the
// one-weight write port are this design's choices.
module weight_memory
  import rnn_pkg::*;
#(
  parameter int unsigned DEPTH   = MUX_DEFAULT,
  parameter int unsigned N_WORDS = N_STATE*N_STATE,
  parameter int unsigned N_RD    = 2,
  localparam int unsigned ROW_W  = (DEPTH   > 1) ? $clog2(DEPTH)   : 1,
  localparam int unsigned WORD_W = (N_WORDS > 1) ? $clog2(N_WORDS) : 1
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [ROW_W-1:0]          wr_row,
  input  logic [WORD_W-1:0]         wr_word,
  input  weight_t                   wr_data,
  input  logic [ROW_W-1:0]          rd_row  [N_RD],
  output weight_t [N_WORDS-1:0]     rd_data [N_RD]
);
  weight_t mem [DEPTH][N_WORDS];

  always_ff @(posedge clk) begin
    if (we && 32'(wr_row) < DEPTH && 32'(wr_word) < N_WORDS) mem[wr_row][wr_word] <= wr_data;
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < N_RD; p++)
      for (int w = 0; w < N_WORDS; w++)
        rd_data[p][w] <= mem[rd_row[p]][w];
  end
endmodule
