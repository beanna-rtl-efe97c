// Self-checking test of dma1 together with weight_bram: fills the weights
// BRAM with a random tile, starts the transfer and checks that every row
// reaches the array-side load port exactly once, in order, with its data,
// and that the transfer takes N + 1 cycles.
module tb_dma1;
  import beanna_pkg::*;
  localparam int N = 16;

  logic clk = 0, rst = 1;
  logic wr_en, start, busy, w_load_en;
  logic [3:0] wr_row, wr_col, rd_row, w_load_row;
  word_t wr_data, rd_data [N], w_load_data [N];
  int checks = 0, failures = 0, cycle = 0;

  weight_bram u_wb (.clk, .wr_en, .wr_row, .wr_col, .wr_data, .rd_row, .rd_data);
  dma1 dut (.clk, .rst, .start, .busy, .wb_rd_row(rd_row), .wb_rd_data(rd_data),
            .w_load_en, .w_load_row, .w_load_data);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t W [N][N];
  int next_row = 0, last_load = 0;

  always @(posedge clk) begin
    #1;
    if (w_load_en) begin
      checks++;
      if (w_load_row != 4'(next_row)) begin failures++; $display("FAIL row order %0d", w_load_row); end
      for (int c = 0; c < N; c++) begin
        checks++;
        if (w_load_data[c] !== W[w_load_row][c]) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d col %0d got %h exp %h", w_load_row, c, w_load_data[c], W[w_load_row][c]);
        end
      end
      next_row++;
      last_load = cycle;
    end
  end

  initial begin
    int t_start;
    wr_en = 0; start = 0; wr_row = 0; wr_col = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int rep = 0; rep < 3; rep++) begin
      for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) W[r][c] = 16'($urandom);
      for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin
        @(negedge clk);
        wr_en = 1; wr_row = 4'(r); wr_col = 4'(c); wr_data = W[r][c];
      end
      @(negedge clk);
      wr_en = 0;
      next_row = 0;
      start = 1;
      t_start = cycle;
      @(negedge clk);
      start = 0;
      while (busy) @(negedge clk);
      checks++;
      if (next_row != N) begin failures++; $display("FAIL %0d rows loaded", next_row); end
      checks++;
      if (last_load - t_start != N + 1) begin failures++; $display("FAIL transfer took %0d cycles", last_load - t_start); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
