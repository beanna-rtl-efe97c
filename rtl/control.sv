// Control module: sequences one inference over all layers.
//
// On start it runs the dataflow of the paper:
//   1. DMA controller 0 loads the input vectors into half 0 of the
//      activations BRAM.
//   2. For each layer L (input in half L mod 2, output in the other half):
//      DMA controller 0 loads the layer's normalization table; then for each
//      n-tile nt and each k-tile kt:
//        a. DMA controller 0 loads weight tile (nt, kt) into the weights BRAM
//           (tiles are stored n-tile major from the layer's weight address);
//        b. DMA controller 1 moves it into the PEs;
//        c. the array runs in the layer's mode: every batch entry's k-tile kt
//           is read from the activations BRAM and streamed through the
//           array, the accumulators storing (kt = 0) or adding the results;
//        d. the controller waits until the accumulators have every result.
//      After the last k-tile DMA controller 2 moves the n-tile through the
//      activation/normalization units into the output half.
//   3. DMA controller 0 stores the last layer's outputs off-chip.
// The array mode is switched between layers only, when the array is empty.
// The step order is the paper's; loading every weight tile again for every
// (n-tile, k-tile) pair, with no overlap of loading and computing, is this
// design's own simplification. busy is high from the cycle after start until
// the cycle done pulses; cycles counts the cycles of the run.
module control
  import beanna_pkg::*;
#(
  parameter int unsigned MAX_BATCH = 256,
  parameter int unsigned MAX_TILES = 64,
  localparam int unsigned AW = 1 + $clog2(MAX_TILES) + $clog2(MAX_BATCH),
  localparam int unsigned TW = $clog2(MAX_TILES),
  localparam int unsigned BW = $clog2(MAX_BATCH)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  run_cfg_t      run_cfg,
  input  layer_cfg_t    layers [MAX_LAYERS],
  output logic          busy,
  output logic          done,
  output logic [31:0]   cycles,
  // DMA controller 0
  output logic          dma0_cmd_valid,
  output dma0_cmd_t     dma0_cmd,
  input  logic          dma0_busy,
  // DMA controller 1
  output logic          dma1_start,
  input  logic          dma1_busy,
  // array and activations BRAM streaming
  output mode_e         mode,
  output logic          act_rd_en,
  output logic [AW-1:0] act_rd_addr,
  // accumulators
  output logic          acc_start,
  output logic          acc_first,
  input  logic          acc_done,
  // DMA controller 2 and act_norm
  output logic          dma2_start,
  input  logic          dma2_busy,
  output logic [TW-1:0] ntile,
  output logic          out_half,
  output logic          out_binary
);

  typedef enum logic [3:0] {
    S_IDLE, S_LD_IN, S_LAYER, S_LD_NORM, S_LD_W, S_XFER_W, S_ACC_START,
    S_STREAM, S_DRAIN, S_DMA2, S_NEXT, S_WAIT, S_DONE
  } state_e;

  state_e      state, after_wait;
  logic [3:0]  layer;
  logic [6:0]  nt, kt;
  logic [BW:0] b;
  logic [31:0] w_ptr;
  layer_cfg_t  lc;
  logic        in_half;

  assign lc         = layers[layer[2:0]];
  assign in_half    = layer[0];
  assign out_half   = ~layer[0];
  assign mode       = lc.mode;
  assign out_binary = lc.out_binary;
  assign ntile      = nt[TW-1:0];
  assign acc_first  = (kt == 7'd0);

  logic waiting_busy;
  assign waiting_busy = dma0_busy | dma1_busy | dma2_busy;

  always_ff @(posedge clk) begin
    if (rst) begin
      state          <= S_IDLE;
      after_wait     <= S_IDLE;
      layer          <= '0;
      nt             <= '0;
      kt             <= '0;
      b              <= '0;
      w_ptr          <= '0;
      busy           <= 1'b0;
      done           <= 1'b0;
      cycles         <= '0;
      dma0_cmd_valid <= 1'b0;
      dma0_cmd       <= '0;
      dma1_start     <= 1'b0;
      dma2_start     <= 1'b0;
      acc_start      <= 1'b0;
      act_rd_en      <= 1'b0;
      act_rd_addr    <= '0;
    end else begin
      dma0_cmd_valid <= 1'b0;
      dma1_start     <= 1'b0;
      dma2_start     <= 1'b0;
      acc_start      <= 1'b0;
      act_rd_en      <= 1'b0;
      done           <= 1'b0;
      if (busy) cycles <= cycles + 1;
      unique case (state)
        S_IDLE: if (start) begin
          busy   <= 1'b1;
          cycles <= '0;
          layer  <= '0;
          state  <= S_LD_IN;
        end
        S_LD_IN: begin
          dma0_cmd_valid <= 1'b1;
          dma0_cmd       <= '{op: DMA0_LOAD_ACT, addr: run_cfg.in_addr, half: 1'b0,
                              tiles: run_cfg.in_tiles, batch: run_cfg.batch};
          state          <= S_WAIT;
          after_wait     <= S_LAYER;
        end
        S_LAYER: begin
          nt    <= '0;
          kt    <= '0;
          w_ptr <= lc.w_addr;
          state <= S_LD_NORM;
        end
        S_LD_NORM: begin
          dma0_cmd_valid <= 1'b1;
          dma0_cmd       <= '{op: DMA0_LOAD_NORM, addr: lc.norm_addr, half: 1'b0,
                              tiles: lc.n_tiles, batch: 9'd0};
          state          <= S_WAIT;
          after_wait     <= S_LD_W;
        end
        S_LD_W: begin
          dma0_cmd_valid <= 1'b1;
          dma0_cmd       <= '{op: DMA0_LOAD_W, addr: w_ptr, half: 1'b0, tiles: 7'd0, batch: 9'd0};
          w_ptr          <= w_ptr + 32'(ARRAY_N * ARRAY_N);
          state          <= S_WAIT;
          after_wait     <= S_XFER_W;
        end
        S_XFER_W: begin
          dma1_start <= 1'b1;
          state      <= S_WAIT;
          after_wait <= S_ACC_START;
        end
        S_ACC_START: begin
          acc_start <= 1'b1;
          b         <= '0;
          state     <= S_STREAM;
        end
        S_STREAM: begin
          act_rd_en   <= 1'b1;
          act_rd_addr <= {in_half, kt[TW-1:0], b[BW-1:0]};
          b           <= b + 1'b1;
          if (b + 1'b1 == run_cfg.batch) state <= S_DRAIN;
        end
        S_DRAIN: if (acc_done && !acc_start) begin
          if (kt + 7'd1 == lc.k_tiles) begin
            kt    <= '0;
            state <= S_DMA2;
          end else begin
            kt    <= kt + 7'd1;
            state <= S_LD_W;
          end
        end
        S_DMA2: begin
          dma2_start <= 1'b1;
          state      <= S_WAIT;
          after_wait <= S_NEXT;
        end
        S_NEXT: begin
          // after an n-tile: next n-tile, next layer or store the results
          if (nt + 7'd1 != lc.n_tiles) begin
            nt    <= nt + 7'd1;
            state <= S_LD_W;
          end else if (layer + 4'd1 != run_cfg.num_layers) begin
            layer <= layer + 4'd1;
            state <= S_LAYER;
          end else begin
            dma0_cmd_valid <= 1'b1;
            dma0_cmd       <= '{op: DMA0_STORE_ACT, addr: run_cfg.out_addr, half: out_half,
                                tiles: lc.n_tiles, batch: run_cfg.batch};
            state          <= S_WAIT;
            after_wait     <= S_DONE;
          end
        end
        S_WAIT: if (!waiting_busy && !dma0_cmd_valid && !dma1_start && !dma2_start) begin
          state <= after_wait;
        end
        S_DONE: begin
          busy  <= 1'b0;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
