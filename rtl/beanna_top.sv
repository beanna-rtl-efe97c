// BEANNA: binary-enabled neural network accelerator, top level.
//
// A fully connected network is run layer by layer on a 16x16 systolic array
// whose PEs compute either bf16 multiply-adds (high-precision layers) or
// 16-bit XNOR-popcount adds (binary layers, where the array acts as 256x16).
// Around it: an AXI4-Lite register file and the control module that
// sequences a run, three DMA controllers (0: off-chip memory, 1: weights
// BRAM to PEs, 2: accumulators through activation/normalization back to the
// activations BRAM), the activations BRAM with one memory per array row, the
// weights BRAM, the per-column partial-sum accumulators and the per-column
// hardtanh/batch-norm units. The block structure is the paper's (its
// overview figure); interfaces between the blocks are this design's own.
//
// Ports: an AXI4-Lite slave for configuration and a 16-bit word port to
// off-chip memory (see dma0 for its handshake). The activations BRAM write
// port belongs to DMA controller 0 while it loads inputs and to DMA
// controller 2 otherwise; its read port to the control module while
// streaming and to DMA controller 0 while storing results. The control
// module never runs two of them at once.
module beanna_top
  import beanna_pkg::*;
#(
  parameter int unsigned N         = ARRAY_N,
  parameter int unsigned MAX_BATCH = 256,
  parameter int unsigned MAX_TILES = 64,
  localparam int unsigned AW = 1 + $clog2(MAX_TILES) + $clog2(MAX_BATCH),
  localparam int unsigned TW = $clog2(MAX_TILES),
  localparam int unsigned BW = $clog2(MAX_BATCH),
  localparam int unsigned LW = $clog2(N)
) (
  input  logic        clk,
  input  logic        rst,
  // AXI4-Lite slave
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [11:0] s_axi_awaddr,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  output logic [1:0]  s_axi_bresp,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  input  logic [11:0] s_axi_araddr,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  // off-chip memory
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output logic        mem_req_write,
  output logic [31:0] mem_req_addr,
  output word_t       mem_req_wdata,
  input  logic        mem_rsp_valid,
  input  word_t       mem_rsp_rdata,
  // end of run
  output logic        irq_done
);

  // registers and control
  logic        start, busy, done;
  logic [31:0] cycles;
  run_cfg_t    run_cfg;
  layer_cfg_t  layers [MAX_LAYERS];

  axi_regs u_regs (
    .clk, .rst,
    .s_axi_awvalid, .s_axi_awready, .s_axi_awaddr, .s_axi_wvalid, .s_axi_wready,
    .s_axi_wdata, .s_axi_wstrb, .s_axi_bvalid, .s_axi_bready, .s_axi_bresp,
    .s_axi_arvalid, .s_axi_arready, .s_axi_araddr, .s_axi_rvalid, .s_axi_rready,
    .s_axi_rdata, .s_axi_rresp,
    .start, .run_cfg, .layers, .busy, .done, .cycles
  );

  logic          dma0_cmd_valid, dma0_busy, dma1_start, dma1_busy, dma2_start, dma2_busy;
  dma0_cmd_t     dma0_cmd;
  mode_e         mode;
  logic          ctl_rd_en, acc_start, acc_first, acc_done, out_half, out_binary;
  logic [AW-1:0] ctl_rd_addr;
  logic [TW-1:0] ntile;

  control #(.MAX_BATCH(MAX_BATCH), .MAX_TILES(MAX_TILES)) u_ctrl (
    .clk, .rst, .start, .run_cfg, .layers, .busy, .done, .cycles,
    .dma0_cmd_valid, .dma0_cmd, .dma0_busy, .dma1_start, .dma1_busy,
    .mode, .act_rd_en(ctl_rd_en), .act_rd_addr(ctl_rd_addr),
    .acc_start, .acc_first, .acc_done,
    .dma2_start, .dma2_busy, .ntile, .out_half, .out_binary
  );

  assign irq_done = done;

  // DMA controller 0
  logic [N-1:0]  d0_act_wr_en;
  logic [AW-1:0] d0_act_wr_addr, d0_act_rd_addr;
  word_t         d0_act_wr_data;
  logic          d0_act_rd_en;
  logic          wb_wr_en, pw_en, pw_sel;
  logic [LW-1:0] wb_wr_row, wb_wr_col, pw_lane;
  logic [TW-1:0] pw_tile;
  word_t         wb_wr_data, pw_data;
  word_t         act_rd_data [N];

  dma0 #(.N(N), .MAX_BATCH(MAX_BATCH), .MAX_TILES(MAX_TILES)) u_dma0 (
    .clk, .rst, .cmd_valid(dma0_cmd_valid), .cmd(dma0_cmd), .busy(dma0_busy),
    .mem_req_valid, .mem_req_ready, .mem_req_write, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata,
    .act_wr_en(d0_act_wr_en), .act_wr_addr(d0_act_wr_addr), .act_wr_data(d0_act_wr_data),
    .act_rd_en(d0_act_rd_en), .act_rd_addr(d0_act_rd_addr), .act_rd_data,
    .wb_wr_en, .wb_wr_row, .wb_wr_col, .wb_wr_data,
    .pw_en, .pw_tile, .pw_lane, .pw_sel, .pw_data
  );

  // weights BRAM and DMA controller 1
  logic [LW-1:0] wb_rd_row, w_load_row;
  word_t         wb_rd_data [N], w_load_data [N];
  logic          w_load_en;

  weight_bram #(.N(N)) u_wbram (
    .clk, .wr_en(wb_wr_en), .wr_row(wb_wr_row), .wr_col(wb_wr_col), .wr_data(wb_wr_data),
    .rd_row(wb_rd_row), .rd_data(wb_rd_data)
  );

  dma1 #(.N(N)) u_dma1 (
    .clk, .rst, .start(dma1_start), .busy(dma1_busy),
    .wb_rd_row, .wb_rd_data, .w_load_en, .w_load_row, .w_load_data
  );

  // activations BRAM
  logic [N-1:0]  d2_act_wr_en, act_wr_en;
  logic [AW-1:0] d2_act_wr_addr, act_wr_addr, act_rd_addr;
  word_t         d2_act_wr_data [N], act_wr_data [N];
  word_t         act_feed [N];
  logic [N-1:0]  act_feed_valid;
  logic          act_rd_en;

  always_comb begin
    if (d0_act_wr_en != '0) begin
      act_wr_en   = d0_act_wr_en;
      act_wr_addr = d0_act_wr_addr;
      for (int r = 0; r < N; r++) act_wr_data[r] = d0_act_wr_data;
    end else begin
      act_wr_en   = d2_act_wr_en;
      act_wr_addr = d2_act_wr_addr;
      act_wr_data = d2_act_wr_data;
    end
    act_rd_en   = ctl_rd_en | d0_act_rd_en;
    act_rd_addr = d0_act_rd_en ? d0_act_rd_addr : ctl_rd_addr;
  end

  activation_bram #(.N(N), .MAX_BATCH(MAX_BATCH), .MAX_TILES(MAX_TILES)) u_abram (
    .clk, .rst, .wr_en(act_wr_en), .wr_addr(act_wr_addr), .wr_data(act_wr_data),
    .rd_en(act_rd_en), .rd_addr(act_rd_addr), .rd_data(act_rd_data),
    .act_out(act_feed), .act_valid(act_feed_valid)
  );

  // systolic array
  word_t        psum [N];
  logic [N-1:0] psum_valid;

  systolic_array #(.N(N)) u_array (
    .clk, .rst, .mode, .w_load_en, .w_load_row, .w_load_data,
    .act_in(act_feed), .act_valid_in(act_feed_valid),
    .psum_out(psum), .psum_valid_out(psum_valid)
  );

  // accumulators
  logic          acc_rd_en;
  logic [BW-1:0] acc_rd_addr;
  word_t         acc_rd_data [N];

  psum_accumulator #(.N(N), .MAX_BATCH(MAX_BATCH)) u_acc (
    .clk, .rst, .start(acc_start), .first(acc_first), .mode, .batch(run_cfg.batch),
    .in_valid(psum_valid), .in_data(psum), .done(acc_done),
    .rd_en(acc_rd_en), .rd_addr(acc_rd_addr), .rd_data(acc_rd_data)
  );

  // activation / normalization and DMA controller 2
  logic         an_in_valid, an_out_valid;
  word_t        an_out_bf16 [N];
  logic [N-1:0] an_out_bits;

  act_norm #(.N(N), .MAX_NTILES(MAX_TILES)) u_actnorm (
    .clk, .rst, .pw_en, .pw_tile, .pw_lane, .pw_sel, .pw_data,
    .ntile, .mode, .in_valid(an_in_valid), .in_data(acc_rd_data),
    .out_valid(an_out_valid), .out_bf16(an_out_bf16), .out_bits(an_out_bits)
  );

  dma2 #(.N(N), .MAX_BATCH(MAX_BATCH), .MAX_TILES(MAX_TILES)) u_dma2 (
    .clk, .rst, .start(dma2_start), .batch(run_cfg.batch), .ntile, .out_half, .out_binary,
    .busy(dma2_busy), .acc_rd_en, .acc_rd_addr,
    .an_in_valid, .an_out_valid, .an_out_bf16, .an_out_bits,
    .act_wr_en(d2_act_wr_en), .act_wr_addr(d2_act_wr_addr), .act_wr_data(d2_act_wr_data)
  );

endmodule
