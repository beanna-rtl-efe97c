// Behavioural model of the off-chip memory (not part of the accelerator).
// 16-bit words; a request is taken when req_valid and req_ready are high;
// req_ready is withheld at random (about one cycle in STALL_IN) to exercise
// back-pressure. Each read returns its word in order, LATENCY cycles after
// it was taken. Testbenches fill and inspect mem[] directly.
module offchip_mem #(
  parameter int unsigned WORDS    = 1 << 16,
  parameter int unsigned LATENCY  = 3,
  parameter int unsigned STALL_IN = 4
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic        req_write,
  input  logic [31:0] req_addr,
  input  logic [15:0] req_wdata,
  output logic        rsp_valid,
  output logic [15:0] rsp_rdata
);
  logic [15:0] mem [WORDS];
  logic [15:0] q_data [$];
  longint      q_due  [$];
  longint      now = 0;
  int          stalls = 0;

  always @(posedge clk) begin
    now <= now + 1;
    if (rst) begin
      req_ready <= 1'b0;
      rsp_valid <= 1'b0;
    end else begin
      if (req_valid && req_ready) begin
        if (req_write) mem[req_addr % WORDS] <= req_wdata;
        else begin
          q_data.push_back(mem[req_addr % WORDS]);
          q_due.push_back(now + LATENCY);
        end
      end
      if (req_valid && !req_ready) stalls <= stalls + 1;
      req_ready <= ($urandom_range(STALL_IN - 1) != 0);
      if (q_due.size() > 0 && q_due[0] <= now) begin
        rsp_valid <= 1'b1;
        rsp_rdata <= q_data.pop_front();
        void'(q_due.pop_front());
      end else begin
        rsp_valid <= 1'b0;
      end
    end
  end
endmodule
