// DMA controller 2: partial-sum accumulators -> activation/normalization ->
// activations BRAM.
//
// After a start pulse it reads the accumulators entry by entry, one batch
// entry (all N columns) per cycle, feeds them to act_norm and writes what
// comes out two cycles later into the output half of the activations BRAM.
// The destination follows the next layer's input layout:
//   bf16 output: neuron 16*ntile + c goes to row c, tile ntile, one word per row;
//   binary output: the N sign bits of the n-tile form one word, written to
//   row ntile mod N, tile ntile / N (256 binary features per tile).
// A pass over batch entries takes batch + 3 cycles; busy is high from the
// cycle after start until the last write. The data path (accumulators
// through activation units back into the activations BRAM) is the paper's;
// the memory layout and the schedule are this design's own.
module dma2
  import beanna_pkg::*;
#(
  parameter int unsigned N         = ARRAY_N,
  parameter int unsigned MAX_BATCH = 256,
  parameter int unsigned MAX_TILES = 64,
  localparam int unsigned AW = 1 + $clog2(MAX_TILES) + $clog2(MAX_BATCH),
  localparam int unsigned TW = $clog2(MAX_TILES),
  localparam int unsigned BW = $clog2(MAX_BATCH),
  localparam int unsigned LW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  logic [BW:0]   batch,
  input  logic [TW-1:0] ntile,
  input  logic          out_half,
  input  logic          out_binary,
  output logic          busy,
  // accumulators
  output logic          acc_rd_en,
  output logic [BW-1:0] acc_rd_addr,
  // activation/normalization units
  output logic          an_in_valid,
  input  logic          an_out_valid,
  input  word_t         an_out_bf16 [N],
  input  logic [N-1:0]  an_out_bits,
  // activations BRAM
  output logic [N-1:0]  act_wr_en,
  output logic [AW-1:0] act_wr_addr,
  output word_t         act_wr_data [N]
);

  logic          reading;
  logic [BW:0]   rd_idx, wr_idx;

  always_ff @(posedge clk) begin
    if (rst) begin
      reading     <= 1'b0;
      rd_idx      <= '0;
      wr_idx      <= '0;
      an_in_valid <= 1'b0;
    end else begin
      an_in_valid <= acc_rd_en;
      if (start && !busy) begin
        reading <= 1'b1;
        rd_idx  <= '0;
        wr_idx  <= '0;
      end else begin
        if (reading) begin
          rd_idx <= rd_idx + 1'b1;
          if (rd_idx + 1'b1 == batch) reading <= 1'b0;
        end
        if (an_out_valid) wr_idx <= wr_idx + 1'b1;
      end
    end
  end

  assign acc_rd_en   = reading;
  assign acc_rd_addr = rd_idx[BW-1:0];
  assign busy        = reading || (wr_idx != rd_idx);

  always_comb begin
    if (out_binary) begin
      act_wr_en   = an_out_valid ? (N'(1) << ntile[LW-1:0]) : '0;
      act_wr_addr = {out_half, TW'(ntile >> LW), wr_idx[BW-1:0]};
      for (int r = 0; r < N; r++) act_wr_data[r] = an_out_bits;
    end else begin
      act_wr_en   = an_out_valid ? '1 : '0;
      act_wr_addr = {out_half, ntile, wr_idx[BW-1:0]};
      act_wr_data = an_out_bf16;
    end
  end

endmodule
