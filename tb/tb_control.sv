// Self-checking test of the control module with behavioural stand-ins for
// the DMA controllers and the accumulators (each stays busy for a random
// number of cycles). For a three-layer configuration it checks the exact
// sequence of DMA controller 0 commands (inputs, normalization tables,
// weight tiles at consecutive addresses, final store), the streamed
// activation addresses, the first/accumulate flag of every k-tile, the n-tile
// and output half of every DMA controller 2 pass, the mode of each layer and
// the done pulse.
module tb_control;
  import beanna_pkg::*;
  localparam int B = 3, NL = 3;
  localparam int K [NL] = '{2, 1, 3};
  localparam int NT [NL] = '{3, 2, 1};
  localparam bit BIN [NL] = '{0, 1, 0};

  logic clk = 0, rst = 1;
  logic start, busy, done, dma0_cmd_valid, dma0_busy, dma1_start, dma1_busy;
  logic act_rd_en, acc_start, acc_first, acc_done, dma2_start, dma2_busy, out_half, out_binary;
  logic [31:0] cycles;
  logic [14:0] act_rd_addr;
  logic [5:0] ntile;
  dma0_cmd_t dma0_cmd;
  mode_e mode;
  run_cfg_t run_cfg;
  layer_cfg_t layers [MAX_LAYERS];
  int checks = 0, failures = 0;

  control dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stand-ins: busy for a random time after a start
  int d0_left = 0, d1_left = 0, d2_left = 0, acc_reads = 0, acc_wait = 0;
  assign dma0_busy = d0_left > 0;
  assign dma1_busy = d1_left > 0;
  assign dma2_busy = d2_left > 0;
  assign acc_done  = (acc_reads == B) && (acc_wait == 0);
  always @(posedge clk) begin
    if (d0_left > 0) d0_left <= d0_left - 1;
    if (d1_left > 0) d1_left <= d1_left - 1;
    if (d2_left > 0) d2_left <= d2_left - 1;
    if (acc_wait > 0 && acc_reads == B) acc_wait <= acc_wait - 1;
    if (dma0_cmd_valid) d0_left <= 1 + $urandom_range(20);
    if (dma1_start) d1_left <= 17;
    if (dma2_start) d2_left <= B + 3;
    if (acc_start) begin acc_reads <= 0; acc_wait <= 30 + $urandom_range(10); end
    else if (act_rd_en) acc_reads <= acc_reads + 1;
  end

  // expected event log, built from the configuration
  string exp_log [$];
  string got_log [$];
  initial begin
    exp_log.push_back($sformatf("D0 op%0d a%h h%0d t%0d b%0d", DMA0_LOAD_ACT, 32'h100, 0, K[0], B));
    for (int l = 0; l < NL; l++) begin
      int wa;
      wa = 32'h1000 * (l + 1);
      exp_log.push_back($sformatf("D0 op%0d a%h h%0d t%0d b%0d", DMA0_LOAD_NORM, 32'h8000 + l * 64, 0, NT[l], 0));
      for (int nt = 0; nt < NT[l]; nt++) begin
        for (int kt = 0; kt < K[l]; kt++) begin
          exp_log.push_back($sformatf("D0 op%0d a%h h%0d t%0d b%0d", DMA0_LOAD_W, wa, 0, 0, 0));
          wa += 256;
          exp_log.push_back("D1");
          exp_log.push_back($sformatf("ACC first%0d mode%0d", kt == 0, BIN[l]));
          for (int b = 0; b < B; b++) exp_log.push_back($sformatf("RD %h", {1'(l % 2), 6'(kt), 8'(b)}));
        end
        exp_log.push_back($sformatf("D2 nt%0d half%0d", nt, 1 - (l % 2)));
      end
    end
    exp_log.push_back($sformatf("D0 op%0d a%h h%0d t%0d b%0d", DMA0_STORE_ACT, 32'h700, 1, NT[NL-1], B));
    exp_log.push_back("DONE");
  end

  always @(posedge clk) if (!rst) begin
    if (dma0_cmd_valid) got_log.push_back($sformatf("D0 op%0d a%h h%0d t%0d b%0d", dma0_cmd.op, dma0_cmd.addr, dma0_cmd.half, dma0_cmd.tiles, dma0_cmd.batch));
    if (dma1_start) got_log.push_back("D1");
    if (acc_start) got_log.push_back($sformatf("ACC first%0d mode%0d", acc_first, mode));
    if (act_rd_en) got_log.push_back($sformatf("RD %h", act_rd_addr));
    if (dma2_start) got_log.push_back($sformatf("D2 nt%0d half%0d", ntile, out_half));
    if (done) got_log.push_back("DONE");
  end

  initial begin
    start = 0;
    run_cfg = '{batch: 9'(B), num_layers: 4'(NL), in_tiles: 7'(K[0]), in_addr: 32'h100, out_addr: 32'h700};
    for (int i = 0; i < MAX_LAYERS; i++) layers[i] = '0;
    for (int l = 0; l < NL; l++)
      layers[l] = '{out_binary: 1'(l == 0), mode: mode_e'(BIN[l]), n_tiles: 7'(NT[l]), k_tiles: 7'(K[l]),
                    w_addr: 32'h1000 * (l + 1), norm_addr: 32'(32'h8000 + l * 64)};
    repeat (3) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    checks++;
    if (!busy) begin failures++; $display("FAIL not busy"); end
    while (!done) @(negedge clk);
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL busy after done"); end
    checks++;
    if (got_log.size() != exp_log.size()) begin
      failures++; $display("FAIL %0d events, expected %0d", got_log.size(), exp_log.size());
    end
    for (int i = 0; i < exp_log.size() && i < got_log.size(); i++) begin
      checks++;
      if (got_log[i] != exp_log[i]) begin
        failures++;
        if (failures < 10) $display("FAIL event %0d: got '%s' expected '%s'", i, got_log[i], exp_log[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
