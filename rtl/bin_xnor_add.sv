// Binary XNOR-add: the binary multiply-add of a processing element.
//
// Sixteen binary activations are multiplied with sixteen binary weights by an
// element-wise XNOR and the products are summed into the incoming partial sum:
//   psum_out = psum_in + 2 * popcount(~(act ^ wgt)) - BITS.
// A bit of 1 stands for +1 and a bit of 0 for -1, so an XNOR of 1 is a product
// of +1 and an XNOR of 0 a product of -1. The 16-bit XNOR and the add follow
// the paper; the bit encoding and the 16-bit two's-complement partial sum are
// this design's own. Purely combinational.
module bin_xnor_add #(
  parameter int unsigned BITS = 16
) (
  input  logic [BITS-1:0]   act,
  input  logic [BITS-1:0]   wgt,
  input  logic signed [15:0] psum_in,
  output logic signed [15:0] psum_out
);

  logic [BITS-1:0] agree;
  logic [15:0]     pop;

  always_comb begin
    agree = ~(act ^ wgt);
    pop   = '0;
    for (int i = 0; i < BITS; i++) pop = pop + 16'(agree[i]);
    psum_out = psum_in + $signed(pop << 1) - $signed(16'(BITS));
  end

endmodule
