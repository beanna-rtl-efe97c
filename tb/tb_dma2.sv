// Self-checking test of dma2 with act_norm: a model of the accumulators
// answers reads one cycle later; dma2 must read every entry once, in order,
// and write the normalized results to the activations BRAM port at the
// layout of the next layer, for a bf16 pass and a binary-output pass, taking
// batch + 3 cycles per pass.
module tb_dma2;
  import beanna_pkg::*;
  import bf16_ref_pkg::*;
  localparam int N = 16, B = 7;

  logic clk = 0, rst = 1;
  logic start, out_half, out_binary, busy, acc_rd_en, an_in_valid, an_out_valid;
  logic [8:0] batch;
  logic [5:0] ntile;
  logic [7:0] acc_rd_addr;
  word_t an_out_bf16 [N], acc_data [N], act_wr_data [N];
  logic [N-1:0] an_out_bits, act_wr_en;
  logic [14:0] act_wr_addr;
  logic pw_en, pw_sel;
  logic [5:0] pw_tile;
  logic [3:0] pw_lane;
  word_t pw_data;
  mode_e mode;
  int checks = 0, failures = 0, cycle = 0;

  dma2 dut (.*);
  act_norm u_an (.clk, .rst, .pw_en, .pw_tile, .pw_lane, .pw_sel, .pw_data, .ntile, .mode,
    .in_valid(an_in_valid), .in_data(acc_data), .out_valid(an_out_valid),
    .out_bf16(an_out_bf16), .out_bits(an_out_bits));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t ACC [B][N];
  word_t SC [N], SH [N];
  int n_rd = 0, n_wr = 0, last_wr = 0;

  always @(posedge clk) begin
    if (acc_rd_en) begin
      for (int c = 0; c < N; c++) acc_data[c] <= ACC[acc_rd_addr][c];
      checks++;
      if (acc_rd_addr != 8'(n_rd)) begin failures++; $display("FAIL read order %0d", acc_rd_addr); end
      n_rd++;
    end
  end

  function automatic word_t expect_y(int b, int c);
    word_t h;
    h = ACC[b][c];
    if (mode == MODE_BINARY) h = ($signed(h) > 0) ? BF16_ONE : ($signed(h) < 0) ? BF16_MINUS1 : 16'h0;
    else if (h[14:0] > 15'h3F80) h = {h[15], 15'h3F80};
    return fma(h, SC[c], SH[c]);
  endfunction

  always @(posedge clk) begin
    #1;
    if (act_wr_en != 0) begin
      int b;
      b = n_wr;
      checks++;
      if (out_binary) begin
        logic [15:0] bits;
        for (int c = 0; c < N; c++) begin
          word_t y;
          y = expect_y(b, c);
          bits[c] = !y[15] || y[14:0] == 0;
        end
        if (act_wr_en != (16'h1 << (ntile % 16)) || act_wr_addr != {out_half, 6'(ntile / 16), 8'(b)} ||
            act_wr_data[ntile % 16] !== bits) begin
          failures++;
          $display("FAIL binary write b%0d en %h addr %h data %h exp %h", b, act_wr_en, act_wr_addr, act_wr_data[ntile % 16], bits);
        end
      end else begin
        if (act_wr_en != 16'hFFFF || act_wr_addr != {out_half, ntile, 8'(b)}) begin
          failures++; $display("FAIL bf16 write b%0d en %h addr %h", b, act_wr_en, act_wr_addr);
        end
        for (int c = 0; c < N; c++) begin
          checks++;
          if (act_wr_data[c] !== expect_y(b, c)) begin
            failures++;
            if (failures < 10) $display("FAIL b%0d c%0d got %h exp %h", b, c, act_wr_data[c], expect_y(b, c));
          end
        end
      end
      n_wr++;
      last_wr = cycle;
    end
  end

  initial begin
    start = 0; out_half = 0; out_binary = 0; batch = 9'(B); ntile = 0; mode = MODE_BF16;
    pw_en = 0; pw_sel = 0; pw_tile = 0; pw_lane = 0; pw_data = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int pass = 0; pass < 2; pass++) begin
      int t_start;
      ntile = (pass == 0) ? 6'd5 : 6'd37;
      mode = (pass == 0) ? MODE_BF16 : MODE_BINARY;
      out_binary = (pass == 1);
      out_half = (pass == 0);
      for (int c = 0; c < N; c++) begin
        SC[c] = rnd_bf(124, 127); SH[c] = rnd_bf(118, 125);
        for (int s = 0; s < 2; s++) begin
          @(negedge clk);
          pw_en = 1; pw_tile = ntile; pw_lane = 4'(c); pw_sel = 1'(s); pw_data = s ? SH[c] : SC[c];
        end
      end
      @(negedge clk);
      pw_en = 0;
      for (int b = 0; b < B; b++) for (int c = 0; c < N; c++)
        ACC[b][c] = (mode == MODE_BINARY) ? 16'($signed(int'($urandom_range(6)) - 3)) : rnd_bf(122, 129);
      n_rd = 0; n_wr = 0;
      @(negedge clk);
      start = 1;
      t_start = cycle;
      @(negedge clk);
      start = 0;
      while (busy) @(negedge clk);
      checks++;
      if (n_rd != B || n_wr != B) begin failures++; $display("FAIL reads %0d writes %0d", n_rd, n_wr); end
      checks++;
      if (last_wr - t_start != B + 3) begin failures++; $display("FAIL pass took %0d cycles", last_wr - t_start); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
