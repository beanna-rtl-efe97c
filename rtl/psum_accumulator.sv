// Accumulator and partial-sums BRAMs, one per array column.
//
// The array produces, per column, one dot product of a 16 (bf16) or 256
// (binary) wide slice of the input for every batch entry. To multiply larger
// matrices the controller runs the k-tiles of an n-tile one after another and
// this block adds the results of all k-tiles per (batch entry, column) in a
// partial-sum memory: a block matrix multiplication. On the first k-tile
// (first = 1) the result is stored, afterwards added: a bf16 addition
// (bf16_fma with b = 1.0) in bf16 mode, a 16-bit integer addition in binary
// mode. The adders and memories per column are the paper's; the accumulation
// types are this design's own.
//
// Timing: start clears the entry counters. Each column counts its own valid
// results, so the skew between columns needs no alignment: the n-th valid
// result of a column belongs to batch entry n. A result is read-modified-
// written over two cycles (memory read, then add and write); done rises when
// every column has written batch entries. DMA controller 2 reads all columns
// of one entry at once with rd_en/rd_addr, data one cycle later; it must not
// read while results are still arriving.
module psum_accumulator
  import beanna_pkg::*;
#(
  parameter int unsigned N         = ARRAY_N,
  parameter int unsigned MAX_BATCH = 256,
  localparam int unsigned BW = $clog2(MAX_BATCH)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  logic          first,
  input  mode_e         mode,
  input  logic [BW:0]   batch,
  input  logic [N-1:0]  in_valid,
  input  word_t         in_data [N],
  output logic          done,
  input  logic          rd_en,
  input  logic [BW-1:0] rd_addr,
  output word_t         rd_data [N]
);

  logic [N-1:0] col_done;

  for (genvar c = 0; c < N; c++) begin : g_col
    word_t         mem [MAX_BATCH];
    logic [BW:0]   rcnt, wcnt;
    logic          s1_v;
    logic [BW-1:0] s1_idx;
    word_t         s1_d;
    word_t         rdata, sum_fp, sum_int, sum;
    logic [BW-1:0] raddr;

    assign raddr = rd_en ? rd_addr : rcnt[BW-1:0];

    always_ff @(posedge clk) begin
      rdata <= mem[raddr];
      if (s1_v) mem[s1_idx] <= sum;
    end

    always_ff @(posedge clk) begin
      if (rst || start) begin
        rcnt <= '0;
        wcnt <= '0;
        s1_v <= 1'b0;
      end else begin
        s1_v <= in_valid[c];
        if (in_valid[c]) begin
          rcnt   <= rcnt + 1'b1;
          s1_idx <= rcnt[BW-1:0];
          s1_d   <= in_data[c];
        end
        if (s1_v) wcnt <= wcnt + 1'b1;
      end
    end

    bf16_fma u_add (.a(rdata), .b(BF16_ONE), .c(s1_d), .y(sum_fp));
    assign sum_int = rdata + s1_d;
    assign sum     = first ? s1_d : (mode == MODE_BINARY ? sum_int : sum_fp);

    assign rd_data[c]  = rdata;
    assign col_done[c] = (wcnt == batch);
  end

  assign done = &col_done;

endmodule
