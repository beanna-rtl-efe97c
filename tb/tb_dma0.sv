// Self-checking test of dma0 against the off-chip memory model (with random
// back-pressure and read latency): one command of each kind, checking every
// word written into the activation, weight and normalization ports and every
// word stored off-chip, and that busy falls only when the command is done.
module tb_dma0;
  import beanna_pkg::*;
  localparam int N = 16;

  logic clk = 0, rst = 1;
  logic cmd_valid, busy;
  dma0_cmd_t cmd;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_rsp_valid;
  logic [31:0] mem_req_addr;
  word_t mem_req_wdata, mem_rsp_rdata;
  logic [N-1:0] act_wr_en;
  logic [14:0] act_wr_addr, act_rd_addr;
  word_t act_wr_data, act_rd_data [N];
  logic act_rd_en, wb_wr_en, pw_en, pw_sel;
  logic [3:0] wb_wr_row, wb_wr_col, pw_lane;
  logic [5:0] pw_tile;
  word_t wb_wr_data, pw_data;
  int checks = 0, failures = 0;

  dma0 dut (.*);
  offchip_mem u_mem (.clk, .rst, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_write(mem_req_write), .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // models of the on-chip destinations
  word_t act [N][1 << 15];
  word_t wb [N][N];
  word_t pm [2][64][N];
  int n_act_wr = 0, n_wb_wr = 0, n_pw = 0;

  always @(posedge clk) begin
    for (int r = 0; r < N; r++) if (act_wr_en[r]) begin act[r][act_wr_addr] <= act_wr_data; n_act_wr++; end
    if (wb_wr_en) begin wb[wb_wr_row][wb_wr_col] <= wb_wr_data; n_wb_wr++; end
    if (pw_en) begin pm[pw_sel][pw_tile][pw_lane] <= pw_data; n_pw++; end
    if (act_rd_en) for (int r = 0; r < N; r++) act_rd_data[r] <= act[r][act_rd_addr];
  end

  task automatic run(dma0_cmd_t k);
    @(negedge clk);
    cmd = k; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    checks++;
    if (!busy) begin failures++; $display("FAIL busy not set"); end
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  task automatic chk(string what, word_t got, word_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 15) $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    cmd_valid = 0; cmd = '0;
    for (int i = 0; i < (1 << 16); i++) u_mem.mem[i] = 16'($urandom);
    repeat (3) @(posedge clk);
    rst <= 0;
    // LOAD_ACT: 3 entries x 2 tiles into half 1
    run('{op: DMA0_LOAD_ACT, addr: 32'h0200, half: 1'b1, tiles: 7'd2, batch: 9'd3});
    for (int b = 0; b < 3; b++) for (int t = 0; t < 2; t++) for (int r = 0; r < N; r++)
      chk("act", act[r][{1'b1, 6'(t), 8'(b)}], u_mem.mem[32'h0200 + (b * 2 + t) * N + r]);
    chk("act count", 16'(n_act_wr), 16'(3 * 2 * N));
    // LOAD_W
    run('{op: DMA0_LOAD_W, addr: 32'h1000, half: 1'b0, tiles: 7'd0, batch: 9'd0});
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++)
      chk("wb", wb[r][c], u_mem.mem[32'h1000 + r * N + c]);
    chk("wb count", 16'(n_wb_wr), 16'(N * N));
    // LOAD_NORM: 3 n-tiles
    run('{op: DMA0_LOAD_NORM, addr: 32'h3000, half: 1'b0, tiles: 7'd3, batch: 9'd0});
    for (int t = 0; t < 3; t++) for (int c = 0; c < N; c++) for (int s = 0; s < 2; s++)
      chk("norm", pm[s][t][c], u_mem.mem[32'h3000 + (t * N + c) * 2 + s]);
    chk("norm count", 16'(n_pw), 16'(3 * N * 2));
    // STORE_ACT: 2 entries x 2 tiles from half 1 back to 0x5000
    run('{op: DMA0_STORE_ACT, addr: 32'h5000, half: 1'b1, tiles: 7'd2, batch: 9'd2});
    for (int b = 0; b < 2; b++) for (int t = 0; t < 2; t++) for (int r = 0; r < N; r++)
      chk("store", u_mem.mem[32'h5000 + (b * 2 + t) * N + r], act[r][{1'b1, 6'(t), 8'(b)}]);
    checks++;
    if (u_mem.stalls == 0) begin failures++; $display("FAIL no back-pressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
