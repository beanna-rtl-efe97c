// Self-checking test of act_norm: loads a random scale/shift table, sends
// bf16 and integer inputs (with values inside and outside [-1, 1]) and checks
// the bf16 result, the sign bits and the two-cycle latency against a
// reference built from the real-number bf16 model.
module tb_act_norm;
  import beanna_pkg::*;
  import bf16_ref_pkg::*;
  localparam int N = 16, NT = 64;

  logic clk = 0, rst = 1;
  logic pw_en, pw_sel, in_valid, out_valid;
  logic [5:0] pw_tile, ntile;
  logic [3:0] pw_lane;
  word_t pw_data, in_data [N], out_bf16 [N];
  logic [N-1:0] out_bits;
  mode_e mode;
  int checks = 0, failures = 0, clamps = 0;

  act_norm dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t SC [NT][N], SH [NT][N];

  function automatic word_t htanh(word_t x, mode_e m);
    real r;
    if (m == MODE_BINARY) return ($signed(x) > 0) ? 16'h3F80 : ($signed(x) < 0) ? 16'hBF80 : 16'h0000;
    r = bf2r(x);
    if (r > 1.0) return 16'h3F80;
    if (r < -1.0) return 16'hBF80;
    return x;
  endfunction

  initial begin
    pw_en = 0; pw_sel = 0; pw_tile = 0; pw_lane = 0; pw_data = 0; ntile = 0; in_valid = 0; mode = MODE_BF16;
    for (int c = 0; c < N; c++) in_data[c] = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int t = 0; t < NT; t++) for (int c = 0; c < N; c++) for (int s = 0; s < 2; s++) begin
      word_t v;
      v = rnd_bf(120, 128);
      if (s == 0) SC[t][c] = v; else SH[t][c] = v;
      @(negedge clk);
      pw_en = 1; pw_tile = 6'(t); pw_lane = 4'(c); pw_sel = 1'(s); pw_data = v;
    end
    @(negedge clk);
    pw_en = 0;
    repeat (300) begin
      word_t X [N];
      mode_e m;
      int t;
      m = $urandom_range(1) ? MODE_BINARY : MODE_BF16;
      t = $urandom_range(NT - 1);
      for (int c = 0; c < N; c++)
        X[c] = m == MODE_BINARY ? 16'($signed(int'($urandom_range(8)) - 4)) : rnd_bf(122, 129);
      mode = m; ntile = 6'(t);
      @(negedge clk);
      in_valid = 1;
      for (int c = 0; c < N; c++) in_data[c] = X[c];
      @(negedge clk);
      in_valid = 0;
      for (int c = 0; c < N; c++) in_data[c] = 16'($urandom);
      checks++;
      if (out_valid) begin failures++; $display("FAIL early valid"); end
      @(negedge clk);
      checks++;
      if (!out_valid) begin failures++; $display("FAIL no valid after 2 cycles"); end
      for (int c = 0; c < N; c++) begin
        word_t h, e;
        h = htanh(X[c], m);
        if (h != X[c] && m == MODE_BF16) clamps++;
        e = fma(h, SC[t][c], SH[t][c]);
        checks++;
        if (out_bf16[c] !== e || out_bits[c] !== (!e[15] || e[14:0] == 0)) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d x=%h got %h/%b exp %h", c, X[c], out_bf16[c], out_bits[c], e);
        end
      end
    end
    checks++;
    if (clamps == 0) begin failures++; $display("FAIL hardtanh clamp never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
