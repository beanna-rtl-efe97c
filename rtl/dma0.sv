// DMA controller 0: the accelerator's only path to off-chip memory.
//
// It executes one command at a time (beanna_pkg::dma0_cmd_t):
//   LOAD_ACT   batch x tiles x N words -> activations BRAM, half cmd.half
//   LOAD_W     N x N words             -> weights BRAM (one tile)
//   LOAD_NORM  tiles x N x 2 words     -> scale/shift table of act_norm
//   STORE_ACT  batch x tiles x N words <- activations BRAM, half cmd.half
// Off-chip words are read and written at consecutive addresses from
// cmd.addr. Word order: activations batch entry, then k-tile, then row
// (row fastest); a weight tile row by row, column fastest; normalization
// parameters n-tile, lane, then scale before shift.
//
// Off-chip port (this design's own, the paper does not describe it): a
// request is taken when mem_req_valid and mem_req_ready are both high; reads
// return one mem_rsp_valid word each, in request order, any number of cycles
// later; writes return nothing. Loads keep issuing requests while responses
// come back. A store reads the activations BRAM (one cycle) and then holds
// the write request until it is accepted, so it moves at most one word every
// three cycles. busy is high from the cycle after cmd_valid until the last
// word has been moved; commands given while busy are ignored. The controller's
// role (inputs, weights, results) is the paper's; using it for the
// normalization table is this design's own.
module dma0
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
  input  logic          clk,
  input  logic          rst,
  input  logic          cmd_valid,
  input  dma0_cmd_t     cmd,
  output logic          busy,
  // off-chip memory
  output logic          mem_req_valid,
  input  logic          mem_req_ready,
  output logic          mem_req_write,
  output logic [31:0]   mem_req_addr,
  output word_t         mem_req_wdata,
  input  logic          mem_rsp_valid,
  input  word_t         mem_rsp_rdata,
  // activations BRAM
  output logic [N-1:0]  act_wr_en,
  output logic [AW-1:0] act_wr_addr,
  output word_t         act_wr_data,
  output logic          act_rd_en,
  output logic [AW-1:0] act_rd_addr,
  input  word_t         act_rd_data [N],
  // weights BRAM
  output logic          wb_wr_en,
  output logic [LW-1:0] wb_wr_row,
  output logic [LW-1:0] wb_wr_col,
  output word_t         wb_wr_data,
  // normalization table
  output logic          pw_en,
  output logic [TW-1:0] pw_tile,
  output logic [LW-1:0] pw_lane,
  output logic          pw_sel,
  output word_t         pw_data
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_ST_RD, S_ST_DATA, S_ST_REQ} state_e;

  state_e      state;
  dma0_cmd_t   c;
  logic [31:0] total, req_cnt, rsp_cnt;
  // position counters: lo fastest; limits depend on the command
  logic [4:0]  lo, lo_max;
  logic [6:0]  mid, mid_max;
  logic [8:0]  hi, hi_max;
  logic        last_pos;
  word_t       st_data;
  logic [LW-1:0] st_row;

  always_comb begin
    unique case (c.op)
      DMA0_LOAD_W:    begin lo_max = 5'(N - 1); mid_max = 7'(N - 1);   hi_max = 9'd0; end
      DMA0_LOAD_NORM: begin lo_max = 5'd1;      mid_max = 7'(N - 1);   hi_max = 9'(c.tiles) - 9'd1; end
      default:        begin lo_max = 5'(N - 1); mid_max = c.tiles - 7'd1; hi_max = c.batch - 9'd1; end
    endcase
    last_pos = (lo == lo_max) && (mid == mid_max) && (hi == hi_max);
  end

  function automatic logic [31:0] count_of(dma0_op_e op, logic [6:0] tiles, logic [8:0] batch);
    unique case (op)
      DMA0_LOAD_W:    return 32'(N * N);
      DMA0_LOAD_NORM: return 32'(tiles) * 32'(2 * N);
      default:        return 32'(batch) * 32'(tiles) * 32'(N);
    endcase
  endfunction

  // activation BRAM address of the current position: {half, tile, entry}
  logic [AW-1:0] pos_act_addr;
  assign pos_act_addr = {c.half, mid[TW-1:0], hi[BW-1:0]};

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= S_IDLE;
      c       <= '0;
      total   <= '0;
      req_cnt <= '0;
      rsp_cnt <= '0;
      lo      <= '0;
      mid     <= '0;
      hi      <= '0;
      st_data <= '0;
      st_row  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c       <= cmd;
          total   <= count_of(cmd.op, cmd.tiles, cmd.batch);
          req_cnt <= '0;
          rsp_cnt <= '0;
          lo      <= '0;
          mid     <= '0;
          hi      <= '0;
          state   <= (cmd.op == DMA0_STORE_ACT) ? S_ST_RD : S_LOAD;
        end
        S_LOAD: begin
          if (mem_req_valid && mem_req_ready) req_cnt <= req_cnt + 1;
          if (mem_rsp_valid) begin
            rsp_cnt <= rsp_cnt + 1;
            if (lo == lo_max) begin
              lo <= '0;
              if (mid == mid_max) begin
                mid <= '0;
                hi  <= hi + 1'b1;
              end else mid <= mid + 1'b1;
            end else lo <= lo + 1'b1;
            if (rsp_cnt + 1 == total) state <= S_IDLE;
          end
        end
        S_ST_RD: begin
          st_row <= lo[LW-1:0];
          state  <= S_ST_DATA;
        end
        S_ST_DATA: begin
          st_data <= act_rd_data[st_row];
          state   <= S_ST_REQ;
        end
        S_ST_REQ: if (mem_req_ready) begin
          req_cnt <= req_cnt + 1;
          if (last_pos) state <= S_IDLE;
          else begin
            state <= S_ST_RD;
            if (lo == lo_max) begin
              lo <= '0;
              if (mid == mid_max) begin
                mid <= '0;
                hi  <= hi + 1'b1;
              end else mid <= mid + 1'b1;
            end else lo <= lo + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // off-chip requests
  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_write = 1'b0;
    mem_req_wdata = st_data;
    mem_req_addr  = c.addr + req_cnt;
    if (state == S_LOAD && req_cnt < total) mem_req_valid = 1'b1;
    if (state == S_ST_REQ) begin
      mem_req_valid = 1'b1;
      mem_req_write = 1'b1;
    end
  end

  // destinations of arriving words
  always_comb begin
    act_wr_en   = '0;
    act_wr_addr = pos_act_addr;
    act_wr_data = mem_rsp_rdata;
    wb_wr_en    = 1'b0;
    wb_wr_row   = mid[LW-1:0];
    wb_wr_col   = lo[LW-1:0];
    wb_wr_data  = mem_rsp_rdata;
    pw_en       = 1'b0;
    pw_tile     = hi[TW-1:0];
    pw_lane     = mid[LW-1:0];
    pw_sel      = lo[0];
    pw_data     = mem_rsp_rdata;
    if (state == S_LOAD && mem_rsp_valid) begin
      unique case (c.op)
        DMA0_LOAD_ACT:  act_wr_en = N'(1) << lo[LW-1:0];
        DMA0_LOAD_W:    wb_wr_en  = 1'b1;
        DMA0_LOAD_NORM: pw_en     = 1'b1;
        default: ;
      endcase
    end
    act_rd_en   = (state == S_ST_RD);
    act_rd_addr = pos_act_addr;
  end

  // A response must belong to an outstanding read.
  assert property (@(posedge clk) disable iff (rst)
    mem_rsp_valid |-> (state == S_LOAD && rsp_cnt < req_cnt));

endmodule
