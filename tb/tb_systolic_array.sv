// Self-checking test of systolic_array at the full 16x16 size: loads a weight
// tile, streams a batch of staggered activation vectors in bf16 mode and in
// binary mode, and checks every column result and the cycle at which it
// appears (t + N + c) against a reference computed row by row.
module tb_systolic_array;
  import beanna_pkg::*;
  import bf16_ref_pkg::*;

  localparam int N = 16;
  localparam int B = 12;

  logic clk = 0, rst = 1;
  mode_e mode;
  logic w_load_en;
  logic [3:0] w_load_row;
  word_t w_load_data [N];
  word_t act_in [N];
  logic [N-1:0] act_valid_in;
  word_t psum_out [N];
  logic [N-1:0] psum_valid_out;
  int checks = 0, failures = 0;
  int cycle = 0;

  systolic_array #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t W [N][N];
  word_t X [B][N];
  word_t Y [B][N];
  int t0;
  int got_cnt [N];

  // Output checker: column c must present entry b at cycle t0 + N + c + b.
  always @(posedge clk) begin
    #1;
    for (int c = 0; c < N; c++) begin
      if (psum_valid_out[c]) begin
        checks++;
        if (got_cnt[c] >= B || psum_out[c] !== Y[got_cnt[c]][c] ||
            cycle != t0 + N + c + got_cnt[c]) begin
          failures++;
          if (failures < 10) $display("FAIL col %0d entry %0d got %h exp %h cycle %0d exp %0d", c, got_cnt[c],
                                      psum_out[c], Y[got_cnt[c]][c], cycle, t0 + N + c + got_cnt[c]);
        end
        got_cnt[c]++;
      end
    end
  end

  initial begin
    mode = MODE_BF16; w_load_en = 0; w_load_row = 0; act_valid_in = 0;
    for (int i = 0; i < N; i++) begin w_load_data[i] = 0; act_in[i] = 0; end
    t0 = 1 << 30;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int pass = 0; pass < 2; pass++) begin
      mode_e m;
      m = (pass != 0) ? MODE_BINARY : MODE_BF16;
      for (int r = 0; r < N; r++) for (int c = 0; c < N; c++)
        W[r][c] = m == MODE_BINARY ? 16'($urandom) : rnd_bf(118, 136);
      for (int b = 0; b < B; b++) for (int r = 0; r < N; r++)
        X[b][r] = m == MODE_BINARY ? 16'($urandom) : rnd_bf(118, 136);
      for (int b = 0; b < B; b++) for (int c = 0; c < N; c++) begin
        word_t s;
        s = 0;
        for (int r = 0; r < N; r++) begin
          if (m == MODE_BINARY) begin
            int v;
            v = int'($signed(s));
            for (int i = 0; i < 16; i++) v += (X[b][r][i] == W[r][c][i]) ? 1 : -1;
            s = 16'(v);
          end else s = fma(X[b][r], W[r][c], s);
        end
        Y[b][c] = s;
      end
      for (int c = 0; c < N; c++) got_cnt[c] = 0;
      @(negedge clk);
      mode = m;
      for (int r = 0; r < N; r++) begin
        w_load_en = 1; w_load_row = 4'(r);
        for (int c = 0; c < N; c++) w_load_data[c] = W[r][c];
        @(negedge clk);
      end
      w_load_en = 0;
      // staggered feed: row r gets entry b at step b + r
      t0 = cycle;
      for (int step = 0; step < B + N; step++) begin
        for (int r = 0; r < N; r++) begin
          int b;
          b = step - r;
          act_valid_in[r] = (b >= 0 && b < B);
          act_in[r] = (b >= 0 && b < B) ? X[b][r] : 16'($urandom);
        end
        @(negedge clk);
      end
      act_valid_in = 0;
      repeat (2 * N + 4) @(negedge clk);
      for (int c = 0; c < N; c++) begin
        checks++;
        if (got_cnt[c] != B) begin failures++; $display("FAIL col %0d got %0d results", c, got_cnt[c]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
