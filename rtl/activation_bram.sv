// Activations BRAMs: one activation memory per array row, with row stagger.
//
// Row r's memory holds word r of every k-tile of every batch vector: in a
// bf16 layer word r of k-tile t is input feature 16t + r, in a binary layer it
// carries the 16 binary features 256t + 16r .. 256t + 16r + 15. The address is
// {half, tile, batch entry}. The two halves are used ping-pong: a layer reads
// its input from one half while its output is written into the other.
//
// One write port with a per-row enable and a shared address (DMA controller 0
// writes one row at a time, DMA controller 2 either all rows or one). One
// read port with a shared address: rd_data is the plain read, one cycle after
// rd_en; act_out/act_valid are the same words staggered, row r delayed by r
// more cycles, so the array receives each vector as a diagonal wavefront
// ("staggered by one column" in the paper). Per-row memories and the stagger
// follow the paper's figure of ACT buffers; sizes, halves and address layout
// are this design's own.
module activation_bram
  import beanna_pkg::*;
#(
  parameter int unsigned N         = ARRAY_N,
  parameter int unsigned MAX_BATCH = 256,
  parameter int unsigned MAX_TILES = 64,
  localparam int unsigned AW = 1 + $clog2(MAX_TILES) + $clog2(MAX_BATCH)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [N-1:0]  wr_en,
  input  logic [AW-1:0] wr_addr,
  input  word_t         wr_data [N],
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output word_t         rd_data [N],
  output word_t         act_out [N],
  output logic [N-1:0]  act_valid
);

  localparam int unsigned DEPTH = 1 << AW;

  logic rd_v;

  always_ff @(posedge clk) begin
    if (rst) rd_v <= 1'b0;
    else     rd_v <= rd_en;
  end

  for (genvar r = 0; r < N; r++) begin : g_row
    word_t mem [DEPTH];

    always_ff @(posedge clk) begin
      if (wr_en[r]) mem[wr_addr] <= wr_data[r];
      if (rd_en)    rd_data[r]   <= mem[rd_addr];
    end

    // Stagger: r register stages after the memory read.
    word_t d_q [r+1];
    logic  v_q [r+1];
    assign d_q[0] = rd_data[r];
    assign v_q[0] = rd_v;
    for (genvar k = 1; k <= r; k++) begin : g_dly
      always_ff @(posedge clk) begin
        if (rst) begin
          d_q[k] <= '0;
          v_q[k] <= 1'b0;
        end else begin
          d_q[k] <= d_q[k-1];
          v_q[k] <= v_q[k-1];
        end
      end
    end
    assign act_out[r]   = d_q[r];
    assign act_valid[r] = v_q[r];
  end

endmodule
