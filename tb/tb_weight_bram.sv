// Self-checking test of weight_bram: random word writes, whole-row reads with
// one cycle of latency, and a check that a write to one column leaves the
// other columns of the row untouched.
module tb_weight_bram;
  import beanna_pkg::*;
  localparam int N = 16;

  logic clk = 0;
  logic wr_en;
  logic [3:0] wr_row, wr_col, rd_row;
  word_t wr_data, rd_data [N];
  int checks = 0, failures = 0;

  weight_bram dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t W [N][N];

  task automatic read_check();
    for (int r = 0; r < N; r++) begin
      @(negedge clk);
      rd_row = 4'(r);
      @(negedge clk);
      for (int c = 0; c < N; c++) begin
        checks++;
        if (rd_data[c] !== W[r][c]) begin
          failures++;
          if (failures < 10) $display("FAIL r%0d c%0d got %h exp %h", r, c, rd_data[c], W[r][c]);
        end
      end
    end
  endtask

  initial begin
    wr_en = 0; wr_row = 0; wr_col = 0; wr_data = 0; rd_row = 0;
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin
      W[r][c] = 16'($urandom);
      @(negedge clk);
      wr_en = 1; wr_row = 4'(r); wr_col = 4'(c); wr_data = W[r][c];
    end
    @(negedge clk);
    wr_en = 0;
    read_check();
    repeat (100) begin
      int r, c;
      r = $urandom_range(N - 1); c = $urandom_range(N - 1);
      W[r][c] = 16'($urandom);
      @(negedge clk);
      wr_en = 1; wr_row = 4'(r); wr_col = 4'(c); wr_data = W[r][c];
      @(negedge clk);
      wr_en = 0;
    end
    read_check();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
