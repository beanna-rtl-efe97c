// AXI4-Lite register file of the accelerator.
//
// Software (or another controller) programs a run through these registers
// and starts it; the control module reads the configuration from them. The
// AXI4-Lite slave and the register block are the paper's; the register map
// is this design's own (byte addresses, 32-bit registers):
//   0x00 CTRL       write 1 to bit 0: start a run (ignored while busy)
//   0x04 STATUS     bit 0 busy, bit 1 done (set at the end of a run, cleared by start)
//   0x08 BATCH      [8:0] batch entries, 1..256
//   0x0C NUM_LAYERS [3:0] layers, 1..8
//   0x10 IN_TILES   [6:0] k-tiles of the input vectors
//   0x14 IN_ADDR    off-chip word address of the inputs
//   0x18 OUT_ADDR   off-chip word address for the results
//   0x1C CYCLES     read only: clock cycles of the last run
//   0x40 + 16*i     LAYER i: [6:0] k_tiles, [14:8] n_tiles, [16] binary mode, [17] binary output
//   0x44 + 16*i     LAYER i weight address
//   0x48 + 16*i     LAYER i normalization table address
// Timing: a write is accepted when address and data are both valid, with
// byte strobes, and answered with an OKAY response the next cycle; a read
// returns its data one cycle after the address. Unmapped addresses read 0.
module axi_regs
  import beanna_pkg::*;
(
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
  // to and from the control module
  output logic        start,
  output run_cfg_t    run_cfg,
  output layer_cfg_t  layers [MAX_LAYERS],
  input  logic        busy,
  input  logic        done,
  input  logic [31:0] cycles
);

  logic [31:0] r_batch, r_nlayers, r_intiles, r_inaddr, r_outaddr;
  logic [31:0] r_lcfg [MAX_LAYERS];
  logic [31:0] r_lw   [MAX_LAYERS];
  logic [31:0] r_ln   [MAX_LAYERS];
  logic        r_done;

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] d, logic [3:0] strb);
    logic [31:0] m;
    for (int i = 0; i < 4; i++) m[8*i +: 8] = strb[i] ? d[8*i +: 8] : old[8*i +: 8];
    return m;
  endfunction

  // layer descriptor index of a write and of a read address
  logic [2:0] wr_li, rd_li;
  assign wr_li = 3'((s_axi_awaddr - 12'h040) >> 4);
  assign rd_li = 3'((s_axi_araddr - 12'h040) >> 4);

  logic wr_fire;
  assign s_axi_awready = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign s_axi_wready  = s_axi_awready;
  assign wr_fire       = s_axi_awready;
  assign s_axi_bresp   = 2'b00;
  assign s_axi_rresp   = 2'b00;
  assign s_axi_arready = !s_axi_rvalid;

  always_ff @(posedge clk) begin
    if (rst) begin
      s_axi_bvalid <= 1'b0;
      start        <= 1'b0;
      r_batch      <= 32'd1;
      r_nlayers    <= 32'd1;
      r_intiles    <= 32'd1;
      r_inaddr     <= '0;
      r_outaddr    <= '0;
      r_done       <= 1'b0;
      for (int i = 0; i < MAX_LAYERS; i++) begin
        r_lcfg[i] <= '0;
        r_lw[i]   <= '0;
        r_ln[i]   <= '0;
      end
    end else begin
      start <= 1'b0;
      if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;
      if (done) r_done <= 1'b1;
      if (wr_fire) begin
        s_axi_bvalid <= 1'b1;
        if (s_axi_awaddr[11:6] != 6'd0) begin
          if (s_axi_awaddr < 12'h040 + 12'(16 * MAX_LAYERS)) unique case (s_axi_awaddr[3:2])
            2'd0: r_lcfg[wr_li] <= merge(r_lcfg[wr_li], s_axi_wdata, s_axi_wstrb);
            2'd1: r_lw[wr_li]   <= merge(r_lw[wr_li],   s_axi_wdata, s_axi_wstrb);
            2'd2: r_ln[wr_li]   <= merge(r_ln[wr_li],   s_axi_wdata, s_axi_wstrb);
            default: ;
          endcase
        end else begin
          unique case (s_axi_awaddr[5:2])
            4'h0: if (s_axi_wstrb[0] && s_axi_wdata[0] && !busy) begin
                    start  <= 1'b1;
                    r_done <= 1'b0;
                  end
            4'h2: r_batch   <= merge(r_batch,   s_axi_wdata, s_axi_wstrb);
            4'h3: r_nlayers <= merge(r_nlayers, s_axi_wdata, s_axi_wstrb);
            4'h4: r_intiles <= merge(r_intiles, s_axi_wdata, s_axi_wstrb);
            4'h5: r_inaddr  <= merge(r_inaddr,  s_axi_wdata, s_axi_wstrb);
            4'h6: r_outaddr <= merge(r_outaddr, s_axi_wdata, s_axi_wstrb);
            default: ;
          endcase
        end
      end
    end
  end

  // read channel
  logic [31:0] rdata;
  always_comb begin
    rdata = '0;
    if (s_axi_araddr[11:6] != 6'd0) begin
      if (s_axi_araddr < 12'h040 + 12'(16 * MAX_LAYERS)) begin
        unique case (s_axi_araddr[3:2])
          2'd0: rdata = r_lcfg[rd_li];
          2'd1: rdata = r_lw[rd_li];
          2'd2: rdata = r_ln[rd_li];
          default: ;
        endcase
      end
    end else begin
      unique case (s_axi_araddr[5:2])
        4'h1: rdata = {30'd0, r_done, busy};
        4'h2: rdata = r_batch;
        4'h3: rdata = r_nlayers;
        4'h4: rdata = r_intiles;
        4'h5: rdata = r_inaddr;
        4'h6: rdata = r_outaddr;
        4'h7: rdata = cycles;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else if (s_axi_arvalid && s_axi_arready) begin
      s_axi_rvalid <= 1'b1;
      s_axi_rdata  <= rdata;
    end else if (s_axi_rready) begin
      s_axi_rvalid <= 1'b0;
    end
  end

  // configuration outputs
  always_comb begin
    run_cfg.batch      = r_batch[8:0];
    run_cfg.num_layers = r_nlayers[3:0];
    run_cfg.in_tiles   = r_intiles[6:0];
    run_cfg.in_addr    = r_inaddr;
    run_cfg.out_addr   = r_outaddr;
    for (int i = 0; i < MAX_LAYERS; i++) begin
      layers[i].k_tiles    = r_lcfg[i][6:0];
      layers[i].n_tiles    = r_lcfg[i][14:8];
      layers[i].mode       = mode_e'(r_lcfg[i][16]);
      layers[i].out_binary = r_lcfg[i][17];
      layers[i].w_addr     = r_lw[i];
      layers[i].norm_addr  = r_ln[i];
    end
  end

  // AXI rules: a response is held until it is taken.
  assert property (@(posedge clk) disable iff (rst) s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
  assert property (@(posedge clk) disable iff (rst) s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));

endmodule
