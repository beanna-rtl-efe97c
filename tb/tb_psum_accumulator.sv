// Self-checking test of psum_accumulator: several passes (first k-tile, then
// accumulating ones) in bf16 and binary mode, with each column's results
// arriving skewed by the column number as from the array; the final memory
// contents, read as DMA controller 2 reads them, are compared with sums
// computed by the reference arithmetic.
module tb_psum_accumulator;
  import beanna_pkg::*;
  import bf16_ref_pkg::*;
  localparam int N = 16, B = 20, KT = 3;

  logic clk = 0, rst = 1;
  logic start, first, done, rd_en;
  mode_e mode;
  logic [8:0] batch;
  logic [N-1:0] in_valid;
  word_t in_data [N], rd_data [N];
  logic [7:0] rd_addr;
  int checks = 0, failures = 0;

  psum_accumulator dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t D [KT][B][N];
  word_t S [B][N];

  initial begin
    start = 0; first = 0; rd_en = 0; rd_addr = 0; in_valid = 0; batch = 9'(B); mode = MODE_BF16;
    for (int c = 0; c < N; c++) in_data[c] = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int pass = 0; pass < 2; pass++) begin
      mode_e m;
      m = (pass != 0) ? MODE_BINARY : MODE_BF16;
      mode = m;
      for (int k = 0; k < KT; k++) for (int b = 0; b < B; b++) for (int c = 0; c < N; c++)
        D[k][b][c] = m == MODE_BINARY ? 16'($signed(int'($urandom_range(512)) - 256)) : rnd_bf(115, 135);
      for (int b = 0; b < B; b++) for (int c = 0; c < N; c++) begin
        S[b][c] = D[0][b][c];
        for (int k = 1; k < KT; k++)
          S[b][c] = m == MODE_BINARY ? S[b][c] + D[k][b][c] : fma(S[b][c], 16'h3F80, D[k][b][c]);
      end
      for (int k = 0; k < KT; k++) begin
        @(negedge clk);
        start = 1; first = (k == 0);
        @(negedge clk);
        start = 0;
        // column c delivers entry b at step b + c
        for (int step = 0; step < B + N; step++) begin
          for (int c = 0; c < N; c++) begin
            int b;
            b = step - c;
            in_valid[c] = (b >= 0 && b < B);
            in_data[c]  = (b >= 0 && b < B) ? D[k][b][c] : 16'($urandom);
          end
          @(negedge clk);
        end
        in_valid = 0;
        checks++;
        repeat (3) @(negedge clk);
        if (!done) begin failures++; $display("FAIL done not set, pass %0d k %0d", pass, k); end
      end
      for (int b = 0; b < B; b++) begin
        rd_en = 1; rd_addr = 8'(b);
        @(negedge clk);
        for (int c = 0; c < N; c++) begin
          checks++;
          if (rd_data[c] !== S[b][c]) begin
            failures++;
            if (failures < 10) $display("FAIL mode %0d b %0d c %0d got %h exp %h", m, b, c, rd_data[c], S[b][c]);
          end
        end
      end
      rd_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
