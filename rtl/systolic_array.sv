// BEANNA matrix-multiply systolic array: N x N weight-stationary PEs.
//
// Activations enter each row at the left and move one PE to the right per
// cycle; partial sums start at zero above the first row and move one PE down
// per cycle, each PE adding its product. Row r holds weights W[r][c] of the
// current tile, so the bottom of column c delivers sum_r act[r] * W[r][c]: in
// bf16 mode a 16-input dot product, in binary mode a 256-input one (16 bits
// per row), which is why the array acts as a 256x16 array for binary layers.
// The grid, the flow directions and the mode broadcast follow the paper.
//
// Timing: the caller must stagger the rows, presenting the activation of
// batch entry b to row r one cycle later than to row r-1 (the activation BRAM
// does this). If row 0 receives entry b at cycle t, the result of column c
// leaves the array at cycle t + N + c, flagged by psum_valid_out[c].
// Weights are loaded one row per cycle: w_load_en with w_load_row selects the
// row, w_load_data holds its N weights. Weight loading and the per-row load
// strobe are this design's own; the paper only names "weight loading".
module systolic_array
  import beanna_pkg::*;
#(
  parameter int unsigned N = ARRAY_N
) (
  input  logic                 clk,
  input  logic                 rst,
  input  mode_e                mode,
  input  logic                 w_load_en,
  input  logic [$clog2(N)-1:0] w_load_row,
  input  word_t                w_load_data [N],
  input  word_t                act_in [N],
  input  logic [N-1:0]         act_valid_in,
  output word_t                psum_out [N],
  output logic [N-1:0]         psum_valid_out
);

  // act[r][c] is the activation entering PE(r,c); psum[r][c] the partial sum.
  word_t act   [N][N+1];
  logic  act_v [N][N+1];
  word_t psum  [N+1][N];
  logic  psum_v[N+1][N];

  for (genvar r = 0; r < N; r++) begin : g_row
    assign act[r][0]   = act_in[r];
    assign act_v[r][0] = act_valid_in[r];
    for (genvar c = 0; c < N; c++) begin : g_col
      logic in_valid;
      if (r == 0) begin : g_top
        assign psum[0][c]   = '0;
        assign psum_v[0][c] = 1'b0;
        assign in_valid     = act_v[0][c];
      end else begin : g_mid
        assign in_valid     = psum_v[r][c];
      end
      processing_element u_pe (
        .clk, .rst, .mode,
        .w_load        (w_load_en && (w_load_row == r[$clog2(N)-1:0])),
        .w_in          (w_load_data[c]),
        .act_in        (act[r][c]),
        .act_valid_in  (act_v[r][c]),
        .psum_in       (psum[r][c]),
        .psum_valid_in (in_valid),
        .act_out       (act[r][c+1]),
        .act_valid_out (act_v[r][c+1]),
        .psum_out      (psum[r+1][c]),
        .psum_valid_out(psum_v[r+1][c])
      );
    end
  end

  for (genvar c = 0; c < N; c++) begin : g_out
    assign psum_out[c]       = psum[N][c];
    assign psum_valid_out[c] = psum_v[N][c];
  end

endmodule
