// Self-checking test of activation_bram: writes rows at random addresses,
// reads them back through the plain port and checks the staggered outputs,
// including that row r appears exactly r cycles after row 0.
module tb_activation_bram;
  import beanna_pkg::*;

  localparam int N = 16;
  localparam int AW = 1 + 6 + 8;

  logic clk = 0, rst = 1;
  logic [N-1:0] wr_en;
  logic [AW-1:0] wr_addr, rd_addr;
  word_t wr_data [N], rd_data [N], act_out [N];
  logic rd_en;
  logic [N-1:0] act_valid;
  int checks = 0, failures = 0;
  int cycle = 0;

  activation_bram dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t model [logic [AW-1:0]][N];
  logic [AW-1:0] addrs [64];
  int rd_cycle [64];
  int seen [N];

  // staggered output checker: row r, k-th read appears at rd_cycle[k] + 1 + r
  always @(posedge clk) begin
    #1;
    for (int r = 0; r < N; r++) if (act_valid[r]) begin
      checks++;
      if (act_out[r] !== model[addrs[seen[r]]][r] || cycle != rd_cycle[seen[r]] + 1 + r) begin
        failures++;
        if (failures < 10) $display("FAIL stagger row %0d read %0d got %h exp %h at %0d", r, seen[r], act_out[r], model[addrs[seen[r]]][r], cycle);
      end
      seen[r]++;
    end
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0;
    for (int r = 0; r < N; r++) begin wr_data[r] = 0; seen[r] = 0; end
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < 64; i++) begin
      addrs[i] = AW'($urandom);
      for (int r = 0; r < N; r++) model[addrs[i]][r] = 16'($urandom);
    end
    // write each address row by row, one row per cycle
    for (int i = 0; i < 64; i++) for (int r = 0; r < N; r++) begin
      @(negedge clk);
      wr_en = N'(1) << r; wr_addr = addrs[i]; wr_data[r] = model[addrs[i]][r];
    end
    @(negedge clk);
    wr_en = 0;
    // read back, plain port checked one cycle after each read
    for (int i = 0; i < 64; i++) begin
      rd_en = 1; rd_addr = addrs[i];
      rd_cycle[i] = cycle;
      @(negedge clk);
      rd_en = 0;
      for (int r = 0; r < N; r++) begin
        checks++;
        if (rd_data[r] !== model[addrs[i]][r]) begin
          failures++;
          if (failures < 10) $display("FAIL rd addr %h row %0d got %h", addrs[i], r, rd_data[r]);
        end
      end
    end
    repeat (N + 2) @(negedge clk);
    for (int r = 0; r < N; r++) begin
      checks++;
      if (seen[r] != 64) begin failures++; $display("FAIL row %0d saw %0d", r, seen[r]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
