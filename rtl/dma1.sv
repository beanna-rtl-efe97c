// DMA controller 1: moves the weight tile from the weights BRAM into the array.
//
// After a start pulse it reads rows 0 .. N-1 of the weights BRAM, one per
// cycle, and one cycle later (the BRAM read latency) presents each row to the
// array with w_load_en and its row number. A transfer takes N + 1 cycles;
// busy is high from the cycle after start until the last row has been loaded.
// The paper gives the controller's job; the one-row-per-cycle schedule is
// this design's own.
module dma1
  import beanna_pkg::*;
#(
  parameter int unsigned N = ARRAY_N,
  localparam int unsigned IW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  output logic          busy,
  output logic [IW-1:0] wb_rd_row,
  input  word_t         wb_rd_data [N],
  output logic          w_load_en,
  output logic [IW-1:0] w_load_row,
  output word_t         w_load_data [N]
);

  logic          reading;
  logic [IW-1:0] row;

  always_ff @(posedge clk) begin
    if (rst) begin
      reading    <= 1'b0;
      row        <= '0;
      w_load_en  <= 1'b0;
      w_load_row <= '0;
    end else begin
      w_load_en  <= reading;
      w_load_row <= row;
      if (start && !reading) begin
        reading <= 1'b1;
        row     <= '0;
      end else if (reading) begin
        row <= row + 1'b1;
        if (row == IW'(N - 1)) reading <= 1'b0;
      end
    end
  end

  assign wb_rd_row   = row;
  assign w_load_data = wb_rd_data;
  assign busy        = reading | w_load_en;

endmodule
