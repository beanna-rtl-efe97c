// Self-checking test of axi_regs: writes every register over AXI4-Lite,
// reads them back, checks the configuration outputs, byte strobes, the start
// pulse (and that start is ignored while busy), the done/busy status bits and
// a read response held while rready is low.
module tb_axi_regs;
  import beanna_pkg::*;

  logic clk = 0, rst = 1;
  logic s_axi_awvalid, s_axi_awready, s_axi_wvalid, s_axi_wready, s_axi_bvalid, s_axi_bready;
  logic s_axi_arvalid, s_axi_arready, s_axi_rvalid, s_axi_rready;
  logic [11:0] s_axi_awaddr, s_axi_araddr;
  logic [31:0] s_axi_wdata, s_axi_rdata, cycles;
  logic [3:0]  s_axi_wstrb;
  logic [1:0]  s_axi_bresp, s_axi_rresp;
  logic start, busy, done;
  run_cfg_t run_cfg;
  layer_cfg_t layers [MAX_LAYERS];
  int checks = 0, failures = 0, n_start = 0;

  axi_regs dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (!rst && start) n_start++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(logic [11:0] a, logic [31:0] d, logic [3:0] strb = 4'hF);
    @(negedge clk);
    s_axi_awvalid = 1; s_axi_awaddr = a; s_axi_wvalid = 1; s_axi_wdata = d; s_axi_wstrb = strb;
    do @(posedge clk); while (!s_axi_awready);
    @(negedge clk);
    s_axi_awvalid = 0; s_axi_wvalid = 0;
    while (!s_axi_bvalid) @(negedge clk);
    checks++;
    if (s_axi_bresp != 2'b00) failures++;
    @(negedge clk);
  endtask

  task automatic rd(logic [11:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axi_arvalid = 1; s_axi_araddr = a;
    do @(posedge clk); while (!s_axi_arready);
    @(negedge clk);
    s_axi_arvalid = 0;
    while (!s_axi_rvalid) @(negedge clk);
    d = s_axi_rdata;
    @(negedge clk);
  endtask

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  initial begin
    logic [31:0] d;
    logic [31:0] lc [MAX_LAYERS], lw [MAX_LAYERS], ln [MAX_LAYERS];
    s_axi_awvalid = 0; s_axi_wvalid = 0; s_axi_arvalid = 0; s_axi_bready = 1; s_axi_rready = 1;
    s_axi_awaddr = 0; s_axi_araddr = 0; s_axi_wdata = 0; s_axi_wstrb = 0;
    busy = 0; done = 0; cycles = 32'h1234_5678;
    repeat (3) @(posedge clk);
    rst <= 0;
    wr(12'h008, 32'd200);
    wr(12'h00C, 32'd5);
    wr(12'h010, 32'd49);
    wr(12'h014, 32'hDEAD_0000);
    wr(12'h018, 32'h0000_BEEF);
    for (int i = 0; i < MAX_LAYERS; i++) begin
      lc[i] = {14'd0, 1'($urandom), 1'($urandom), 1'b0, 7'($urandom), 1'b0, 7'($urandom)};
      lw[i] = $urandom; ln[i] = $urandom;
      wr(12'(12'h040 + 16 * i), lc[i]);
      wr(12'(12'h044 + 16 * i), lw[i]);
      wr(12'(12'h048 + 16 * i), ln[i]);
    end
    wr(12'h0C0, 32'hFFFF_FFFF);           // unmapped: must change nothing
    chk("batch", 32'(run_cfg.batch), 200);
    chk("layers", 32'(run_cfg.num_layers), 5);
    chk("in_tiles", 32'(run_cfg.in_tiles), 49);
    chk("in_addr", run_cfg.in_addr, 32'hDEAD_0000);
    chk("out_addr", run_cfg.out_addr, 32'h0000_BEEF);
    for (int i = 0; i < MAX_LAYERS; i++) begin
      chk("k", 32'(layers[i].k_tiles), 32'(lc[i][6:0]));
      chk("n", 32'(layers[i].n_tiles), 32'(lc[i][14:8]));
      chk("mode", 32'(layers[i].mode), 32'(lc[i][16]));
      chk("obin", 32'(layers[i].out_binary), 32'(lc[i][17]));
      chk("w", layers[i].w_addr, lw[i]);
      chk("nrm", layers[i].norm_addr, ln[i]);
      rd(12'(12'h040 + 16 * i), d); chk("rd lc", d, lc[i]);
      rd(12'(12'h044 + 16 * i), d); chk("rd lw", d, lw[i]);
      rd(12'(12'h048 + 16 * i), d); chk("rd ln", d, ln[i]);
    end
    rd(12'h0C0, d); chk("unmapped", d, 0);
    rd(12'h01C, d); chk("cycles", d, 32'h1234_5678);
    // byte strobe
    wr(12'h014, 32'h0000_00AB, 4'b0001);
    chk("strobe", run_cfg.in_addr, 32'hDEAD_00AB);
    // start pulse, status
    wr(12'h000, 1);
    chk("start", n_start, 1);
    busy = 1;
    rd(12'h004, d); chk("status busy", d, 1);
    wr(12'h000, 1);
    chk("start while busy ignored", n_start, 1);
    @(negedge clk); done = 1; @(negedge clk); done = 0; busy = 0;
    rd(12'h004, d); chk("status done", d, 2);
    wr(12'h000, 1);
    rd(12'h004, d); chk("done cleared by start", d, 0);
    // read held while rready low
    @(negedge clk);
    s_axi_rready = 0; s_axi_arvalid = 1; s_axi_araddr = 12'h008;
    @(negedge clk);
    s_axi_arvalid = 0;
    repeat (3) @(negedge clk);
    chk("rvalid held", 32'(s_axi_rvalid), 1);
    chk("rdata held", s_axi_rdata, 200);
    s_axi_rready = 1;
    @(negedge clk);
    chk("rvalid dropped", 32'(s_axi_rvalid), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
