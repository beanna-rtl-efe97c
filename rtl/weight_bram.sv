// Weights BRAM: holds one N x N weight tile for the systolic array.
//
// DMA controller 0 writes it one 16-bit word at a time (row, column), in the
// order the words arrive from off-chip memory; DMA controller 1 reads it one
// whole row of N words at a time, with one cycle of read latency, to load the
// array. Word (r, c) is the weight of PE(r, c): one bf16 weight, or 16 binary
// weights. The block and its place between the two DMA controllers are the
// paper's; holding exactly one tile is this design's own choice.
module weight_bram
  import beanna_pkg::*;
#(
  parameter int unsigned N = ARRAY_N,
  localparam int unsigned IW = $clog2(N)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [IW-1:0] wr_row,
  input  logic [IW-1:0] wr_col,
  input  word_t         wr_data,
  input  logic [IW-1:0] rd_row,
  output word_t         rd_data [N]
);

  // One memory per column so that a whole row can be read at once.
  for (genvar c = 0; c < N; c++) begin : g_col
    word_t mem [N];
    always_ff @(posedge clk) begin
      if (wr_en && wr_col == c[IW-1:0]) mem[wr_row] <= wr_data;
      rd_data[c] <= mem[rd_row];
    end
  end

endmodule
