// End-to-end test of beanna_top with every parameter at its default.
//
// A three-layer hybrid network is programmed over AXI4-Lite and run on a
// batch of five vectors: a bf16 layer (32 -> 256 neurons, outputs binarized),
// a binary layer (256 -> 32, bf16 outputs) and a bf16 output layer
// (32 -> 16). Inputs, weights and normalization tables are generated at
// random into the off-chip memory model; the expected results are computed
// here with the reference bf16 arithmetic in the order the array uses
// (row by row within a k-tile, then k-tile by k-tile). The test checks every
// stored result, the status and cycle registers, and counts the mechanisms
// of the design: mode switches, k-tile accumulation, binarized and bf16
// outputs, hardtanh clamping, memory back-pressure and weight-tile loads.
module tb_beanna_top;
  import beanna_pkg::*;
  import bf16_ref_pkg::*;

  localparam int N = 16;
  localparam int B = 5;
  localparam int NL = 3;
  // layer shapes: k_tiles, n_tiles, mode, out_binary
  localparam int K [NL] = '{2, 1, 2};
  localparam int NT [NL] = '{16, 2, 1};
  localparam bit BIN [NL] = '{0, 1, 0};
  localparam bit OBIN [NL] = '{1, 0, 0};
  localparam int IN_ADDR = 32'h0100, OUT_ADDR = 32'h0800;
  localparam int W_ADDR [NL] = '{32'h1000, 32'h9000, 32'hA000};
  localparam int NORM_ADDR [NL] = '{32'hC000, 32'hC400, 32'hC800};

  logic clk = 0, rst = 1;
  logic s_axi_awvalid, s_axi_awready, s_axi_wvalid, s_axi_wready, s_axi_bvalid, s_axi_bready;
  logic s_axi_arvalid, s_axi_arready, s_axi_rvalid, s_axi_rready;
  logic [11:0] s_axi_awaddr, s_axi_araddr;
  logic [31:0] s_axi_wdata, s_axi_rdata;
  logic [3:0]  s_axi_wstrb;
  logic [1:0]  s_axi_bresp, s_axi_rresp;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_rsp_valid, irq_done;
  logic [31:0] mem_req_addr;
  word_t mem_req_wdata, mem_rsp_rdata;
  int checks = 0, failures = 0;

  beanna_top dut (.*);

  offchip_mem u_mem (.clk, .rst, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_write(mem_req_write), .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_mode_switch = 0, n_accum = 0, n_bin_wr = 0, n_fp_wr = 0, n_stall = 0, n_wload = 0, n_clamp = 0;
  mode_e last_mode = MODE_BF16;
  always @(posedge clk) if (!rst) begin
    if (dut.mode != last_mode) n_mode_switch++;
    last_mode <= dut.mode;
    if (dut.acc_start && !dut.acc_first) n_accum++;
    if (dut.an_out_valid && dut.out_binary) n_bin_wr++;
    if (dut.an_out_valid && !dut.out_binary) n_fp_wr++;
    if (mem_req_valid && !mem_req_ready) n_stall++;
    if (dut.dma1_start) n_wload++;
  end

  task automatic axi_write(logic [11:0] a, logic [31:0] d);
    @(negedge clk);
    s_axi_awvalid = 1; s_axi_awaddr = a; s_axi_wvalid = 1; s_axi_wdata = d; s_axi_wstrb = 4'hF;
    do @(posedge clk); while (!s_axi_awready);
    @(negedge clk);
    s_axi_awvalid = 0; s_axi_wvalid = 0;
    while (!s_axi_bvalid) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic axi_read(logic [11:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axi_arvalid = 1; s_axi_araddr = a;
    do @(posedge clk); while (!s_axi_arready);
    @(negedge clk);
    s_axi_arvalid = 0;
    while (!s_axi_rvalid) @(negedge clk);
    d = s_axi_rdata;
    @(negedge clk);
  endtask

  // read access to the activations BRAM rows
  logic [14:0] peek_addr = 0;
  word_t peek_data [16];
  for (genvar r = 0; r < 16; r++) begin : g_peek
    assign peek_data[r] = dut.u_abram.g_row[r].mem[peek_addr];
  end

  // network data: activations as words per feature (bf16) or bits
  word_t X0 [B][32];
  word_t WF0 [32][256];                 // layer 0 weights, bf16
  logic  WB1 [256][32];                 // layer 1 weights, binary
  word_t WF2 [32][16];                  // layer 2 weights, bf16
  word_t SC [NL][256], SH [NL][256];
  logic  A1 [B][256];                   // layer 0 outputs, binary
  word_t A2 [B][32];                    // layer 1 outputs, bf16
  word_t Y  [B][16];                    // layer 2 outputs, bf16

  function automatic word_t htanh_bf(word_t x);
    if (x[14:0] > 15'h3F80) begin
      n_clamp++;
      return {x[15], 15'h3F80};
    end
    return x;
  endfunction

  // bf16 layer: k-tile chains of the array, then accumulation, then act/norm
  function automatic word_t fp_neuron(int l, int kt_n, int n, int b);
    word_t acc, s, x, w;
    acc = 0;
    for (int kt = 0; kt < kt_n; kt++) begin
      s = 0;
      for (int r = 0; r < 16; r++) begin
        int k;
        k = kt * 16 + r;
        x = (l == 0) ? X0[b][k] : A2[b][k];
        w = (l == 0) ? WF0[k][n] : WF2[k][n];
        s = fma(x, w, s);
      end
      acc = (kt == 0) ? s : fma(acc, BF16_ONE, s);
    end
    return fma(htanh_bf(acc), SC[l][n], SH[l][n]);
  endfunction

  initial begin
    logic [31:0] rd;
    s_axi_awvalid = 0; s_axi_wvalid = 0; s_axi_arvalid = 0; s_axi_bready = 1; s_axi_rready = 1;
    s_axi_awaddr = 0; s_axi_araddr = 0; s_axi_wdata = 0; s_axi_wstrb = 0;

    // ---- random network and its reference results ----
    for (int b = 0; b < B; b++) for (int k = 0; k < 32; k++) X0[b][k] = rnd_bf(122, 128);
    for (int k = 0; k < 32; k++) for (int n = 0; n < 256; n++) WF0[k][n] = rnd_bf(122, 127);
    for (int k = 0; k < 256; k++) for (int n = 0; n < 32; n++) WB1[k][n] = 1'($urandom);
    for (int k = 0; k < 32; k++) for (int n = 0; n < 16; n++) WF2[k][n] = rnd_bf(122, 127);
    for (int l = 0; l < NL; l++) for (int n = 0; n < 256; n++) begin
      SC[l][n] = rnd_bf(124, 127);
      SH[l][n] = rnd_bf(118, 124);
    end
    for (int b = 0; b < B; b++) for (int n = 0; n < 256; n++) begin
      word_t y;
      y = fp_neuron(0, K[0], n, b);
      A1[b][n] = !y[15] || (y[14:0] == 0);
    end
    for (int b = 0; b < B; b++) for (int n = 0; n < 32; n++) begin
      int s;
      word_t h;
      s = 0;
      for (int k = 0; k < 256; k++) s += (A1[b][k] == WB1[k][n]) ? 1 : -1;
      h = (s > 0) ? BF16_ONE : (s < 0) ? BF16_MINUS1 : 16'h0000;
      A2[b][n] = fma(h, SC[1][n], SH[1][n]);
    end
    for (int b = 0; b < B; b++) for (int n = 0; n < 16; n++) Y[b][n] = fp_neuron(2, K[2], n, b);

    // ---- off-chip memory image ----
    for (int i = 0; i < (1 << 16); i++) u_mem.mem[i] = 16'($urandom);
    for (int b = 0; b < B; b++) for (int t = 0; t < K[0]; t++) for (int r = 0; r < 16; r++)
      u_mem.mem[IN_ADDR + (b * K[0] + t) * 16 + r] = X0[b][t * 16 + r];
    for (int l = 0; l < NL; l++)
      for (int nt = 0; nt < NT[l]; nt++) for (int kt = 0; kt < K[l]; kt++)
        for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) begin
          int a, n;
          word_t w;
          a = W_ADDR[l] + (nt * K[l] + kt) * 256 + r * 16 + c;
          n = nt * 16 + c;
          if (l == 0) w = WF0[kt * 16 + r][n];
          else if (l == 2) w = WF2[kt * 16 + r][n];
          else for (int i = 0; i < 16; i++) w[i] = WB1[kt * 256 + r * 16 + i][n];
          u_mem.mem[a] = w;
        end
    for (int l = 0; l < NL; l++) for (int n = 0; n < NT[l] * 16; n++) begin
      u_mem.mem[NORM_ADDR[l] + 2 * n]     = SC[l][n];
      u_mem.mem[NORM_ADDR[l] + 2 * n + 1] = SH[l][n];
    end

    repeat (4) @(posedge clk);
    rst <= 0;
    repeat (2) @(posedge clk);

    // ---- program and run ----
    axi_write(12'h008, B);
    axi_write(12'h00C, NL);
    axi_write(12'h010, K[0]);
    axi_write(12'h014, IN_ADDR);
    axi_write(12'h018, OUT_ADDR);
    for (int l = 0; l < NL; l++) begin
      axi_write(12'(12'h040 + 16 * l), {14'd0, OBIN[l], BIN[l], 1'b0, 7'(NT[l]), 1'b0, 7'(K[l])});
      axi_write(12'(12'h044 + 16 * l), W_ADDR[l]);
      axi_write(12'(12'h048 + 16 * l), NORM_ADDR[l]);
    end
    axi_read(12'h008, rd);
    checks++; if (rd != B) begin failures++; $display("FAIL BATCH readback %0d", rd); end
    axi_write(12'h000, 1);
    axi_read(12'h004, rd);
    checks++; if (rd[0] != 1'b1) begin failures++; $display("FAIL not busy after start"); end
    do axi_read(12'h004, rd); while (rd[1] == 1'b0);
    checks++; if (rd[0] != 1'b0) begin failures++; $display("FAIL busy after done"); end
    axi_read(12'h01C, rd);
    $display("run took %0d cycles", rd);
    checks++; if (rd == 0) begin failures++; $display("FAIL cycle counter"); end

    // ---- results ----
    for (int b = 0; b < B; b++) for (int n = 0; n < 16; n++) begin
      word_t got;
      got = u_mem.mem[OUT_ADDR + b * 16 + n];
      checks++;
      if (got !== Y[b][n]) begin
        failures++;
        if (failures < 20) $display("FAIL out b%0d n%0d got %h exp %h", b, n, got, Y[b][n]);
      end
    end
    // intermediate layer outputs still in the activations BRAM: layer 1 in half 0
    for (int b = 0; b < B; b++) for (int n = 0; n < 32; n++) begin
      word_t got;
      peek_addr = {1'b0, 6'(n / 16), 8'(b)};
      #1;
      got = peek_data[n % 16];
      checks++;
      if (got !== A2[b][n]) begin
        failures++;
        if (failures < 20) $display("FAIL layer1 b%0d n%0d got %h exp %h", b, n, got, A2[b][n]);
      end
    end

    // ---- mechanisms ----
    $display("mode switches %0d, accumulating k-tiles %0d, binary writes %0d, bf16 writes %0d, hardtanh clamps %0d, memory stalls %0d, weight tiles %0d",
             n_mode_switch, n_accum, n_bin_wr, n_fp_wr, n_clamp, n_stall, n_wload);
    checks++; if (n_mode_switch < 2) begin failures++; $display("FAIL no mode switch"); end
    checks++; if (n_accum == 0) begin failures++; $display("FAIL no k-tile accumulation"); end
    checks++; if (n_bin_wr == 0) begin failures++; $display("FAIL no binarized output"); end
    checks++; if (n_fp_wr == 0) begin failures++; $display("FAIL no bf16 output"); end
    checks++; if (n_clamp == 0) begin failures++; $display("FAIL no hardtanh clamp"); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no memory stall"); end
    checks++; if (n_wload != NT[0] * K[0] + NT[1] * K[1] + NT[2] * K[2]) begin failures++; $display("FAIL weight tiles %0d", n_wload); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
