// BEANNA processing element (PE).
//
// A weight-stationary PE with two arithmetic units side by side: a bfloat16
// multiply-add and a 16-bit binary XNOR-add. Both read the stationary weight,
// the activation arriving from the left and the partial sum arriving from
// above; a 2:1 multiplexer chosen by the array mode picks the result, which is
// registered and passed down. The activation is registered and passed right.
// The inputs of the unit that is not selected are forced to zero so that it
// does not toggle. This structure is the paper's.
//
// Interface and timing (this design's own): w_load latches w_in into the
// weight register. Each cycle the PE registers act_out <= act_in and
// psum_out <= selected result, so both outputs lag their inputs by exactly one
// clock; act_valid and psum_valid travel with the data. In bf16 mode the
// partial sum is a bf16 value, in binary mode a 16-bit two's-complement
// integer. Synchronous active-high reset clears the registers.
module processing_element
  import beanna_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  mode_e mode,
  input  logic  w_load,
  input  word_t w_in,
  input  word_t act_in,
  input  logic  act_valid_in,
  input  word_t psum_in,
  input  logic  psum_valid_in,
  output word_t act_out,
  output logic  act_valid_out,
  output word_t psum_out,
  output logic  psum_valid_out
);

  word_t weight;
  word_t fp_a, fp_w, fp_c, fp_y;
  word_t bn_a, bn_w, bn_c, bn_y;
  word_t result;

  // Tie-off of the unused unit.
  always_comb begin
    if (mode == MODE_BINARY) begin
      {fp_a, fp_w, fp_c} = '0;
      {bn_a, bn_w, bn_c} = {act_in, weight, psum_in};
    end else begin
      {fp_a, fp_w, fp_c} = {act_in, weight, psum_in};
      {bn_a, bn_w, bn_c} = '0;
    end
  end

  bf16_fma u_fp (.a(fp_a), .b(fp_w), .c(fp_c), .y(fp_y));

  bin_xnor_add #(.BITS(WORD_W)) u_bin (.act(bn_a), .wgt(bn_w), .psum_in(bn_c), .psum_out(bn_y));

  assign result = (mode == MODE_BINARY) ? bn_y : fp_y;

  always_ff @(posedge clk) begin
    if (rst) begin
      weight         <= '0;
      act_out        <= '0;
      act_valid_out  <= 1'b0;
      psum_out       <= '0;
      psum_valid_out <= 1'b0;
    end else begin
      if (w_load) weight <= w_in;
      act_out        <= act_in;
      act_valid_out  <= act_valid_in;
      psum_out       <= result;
      psum_valid_out <= psum_valid_in;
    end
  end

endmodule
