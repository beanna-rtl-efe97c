// Shared types and constants of the BEANNA accelerator.
//
// BEANNA runs fully connected layers on a 16x16 weight-stationary systolic
// array whose processing elements compute either a bfloat16 multiply-add or a
// 16-bit binary XNOR-add. This package holds the data word type, the array
// mode, the per-layer descriptor kept in the register file and the command
// word of DMA controller 0. The 16x16 size and the bfloat16 format (1 sign,
// 8 exponent, 7 mantissa bits) follow the paper; the descriptor fields, field
// widths and command encodings are this design's own.
package beanna_pkg;

  localparam int unsigned ARRAY_N    = 16;   // rows = columns of the array
  localparam int unsigned WORD_W     = 16;   // one bf16 value or 16 binary values
  localparam int unsigned MAX_LAYERS = 8;    // layer descriptors in the register file

  typedef logic [WORD_W-1:0] word_t;

  localparam word_t BF16_ONE     = 16'h3F80;  // +1.0
  localparam word_t BF16_MINUS1  = 16'hBF80;  // -1.0
  localparam word_t BF16_QNAN    = 16'h7FC0;

  // Arithmetic mode of the array, the accumulators and the activation unit.
  typedef enum logic {
    MODE_BF16   = 1'b0,
    MODE_BINARY = 1'b1
  } mode_e;

  // One layer of the network as the controller executes it.
  // k_tiles: input k-tiles (16 bf16 features or 256 binary features each)
  // n_tiles: output tiles of 16 neurons
  typedef struct packed {
    logic        out_binary;  // store sign bits for a following binary layer
    mode_e       mode;        // arithmetic of this layer
    logic [6:0]  n_tiles;
    logic [6:0]  k_tiles;
    logic [31:0] w_addr;      // off-chip word address of the first weight tile
    logic [31:0] norm_addr;   // off-chip word address of scale/shift pairs
  } layer_cfg_t;

  // Run configuration held by the register file.
  typedef struct packed {
    logic [8:0]  batch;       // 1 .. MAX_BATCH vectors
    logic [3:0]  num_layers;  // 1 .. MAX_LAYERS
    logic [6:0]  in_tiles;    // k-tiles of the input vectors
    logic [31:0] in_addr;     // off-chip address of the input vectors
    logic [31:0] out_addr;    // off-chip address for the results
  } run_cfg_t;

  // Operations of DMA controller 0.
  typedef enum logic [1:0] {
    DMA0_LOAD_ACT  = 2'd0,    // off-chip -> activations BRAM
    DMA0_LOAD_W    = 2'd1,    // off-chip -> weights BRAM (one 16x16 tile)
    DMA0_LOAD_NORM = 2'd2,    // off-chip -> normalization parameter table
    DMA0_STORE_ACT = 2'd3     // activations BRAM -> off-chip
  } dma0_op_e;

  typedef struct packed {
    dma0_op_e    op;
    logic [31:0] addr;        // off-chip start address (16-bit word address)
    logic        half;        // activations BRAM half for LOAD_ACT/STORE_ACT
    logic [6:0]  tiles;       // k-tiles (activations) or n-tiles (norm params)
    logic [8:0]  batch;       // vectors (activations)
  } dma0_cmd_t;

endpackage
