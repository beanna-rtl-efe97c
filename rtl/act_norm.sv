// Activation and normalization units, one lane per array column.
//
// Each layer output goes through a hardtanh, clamp(x, -1, +1), and then a
// batch normalization, which at inference is one multiply-add per neuron:
// y = h * scale + shift, in bf16. For a following binary layer the result is
// also reduced to its sign (bit 1 for y >= 0, i.e. +1; bit 0 for -1). In
// binary mode the input is the integer sum of a binary layer, whose hardtanh
// is exactly -1, 0 or +1. The hardtanh-then-normalization order is the
// paper's; folding batch norm into scale/shift, the parameter table and the
// sign rule are this design's own.
//
// The table holds a (scale, shift) pair for every neuron of the layer, lane c
// of n-tile t being neuron 16t + c; DMA controller 0 writes it through
// pw_* (pw_sel 0 = scale, 1 = shift). During a pass ntile selects the row of
// the table. Timing: two cycles from in_valid to out_valid; the table is read
// in the first, hardtanh and multiply-add are done in the second. ntile must
// be stable from one cycle before the first in_valid.
module act_norm
  import beanna_pkg::*;
#(
  parameter int unsigned N          = ARRAY_N,
  parameter int unsigned MAX_NTILES = 64,
  localparam int unsigned TW = $clog2(MAX_NTILES),
  localparam int unsigned LW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          pw_en,
  input  logic [TW-1:0] pw_tile,
  input  logic [LW-1:0] pw_lane,
  input  logic          pw_sel,
  input  word_t         pw_data,
  input  logic [TW-1:0] ntile,
  input  mode_e         mode,
  input  logic          in_valid,
  input  word_t         in_data [N],
  output logic          out_valid,
  output word_t         out_bf16 [N],
  output logic [N-1:0]  out_bits
);

  logic s1_v;

  always_ff @(posedge clk) begin
    if (rst) begin
      s1_v      <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      s1_v      <= in_valid;
      out_valid <= s1_v;
    end
  end

  for (genvar c = 0; c < N; c++) begin : g_lane
    word_t scale_mem [MAX_NTILES];
    word_t shift_mem [MAX_NTILES];
    word_t scale, shift, x, h, y;

    always_ff @(posedge clk) begin
      if (pw_en && pw_lane == c[LW-1:0] && !pw_sel) scale_mem[pw_tile] <= pw_data;
      if (pw_en && pw_lane == c[LW-1:0] &&  pw_sel) shift_mem[pw_tile] <= pw_data;
      scale <= scale_mem[ntile];
      shift <= shift_mem[ntile];
      x     <= in_data[c];
    end

    // hardtanh
    always_comb begin
      if (mode == MODE_BINARY) begin
        if ($signed(x) > 0)      h = BF16_ONE;
        else if ($signed(x) < 0) h = BF16_MINUS1;
        else                     h = '0;
      end else begin
        if (x[14:0] > BF16_ONE[14:0]) h = {x[15], BF16_ONE[14:0]};
        else                          h = x;
      end
    end

    bf16_fma u_bn (.a(h), .b(scale), .c(shift), .y(y));

    always_ff @(posedge clk) begin
      out_bf16[c] <= y;
      out_bits[c] <= ~y[15] | (y[14:0] == 15'd0);
    end
  end

endmodule
