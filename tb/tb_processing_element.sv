// Self-checking test of processing_element: loads a weight, drives random
// activations and partial sums in both modes and checks the registered
// outputs one cycle later against the reference arithmetic.
module tb_processing_element;
  import beanna_pkg::*;
  import bf16_ref_pkg::*;

  logic clk = 0, rst = 1;
  mode_e mode;
  logic w_load, av_in, pv_in, av_out, pv_out;
  word_t w_in, a_in, p_in, a_out, p_out;
  int checks = 0, failures = 0;

  processing_element dut (.clk, .rst, .mode, .w_load, .w_in, .act_in(a_in), .act_valid_in(av_in),
    .psum_in(p_in), .psum_valid_in(pv_in), .act_out(a_out), .act_valid_out(av_out),
    .psum_out(p_out), .psum_valid_out(pv_out));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t bin_ref(word_t a, word_t w, word_t p);
    int s = int'($signed(p));
    for (int i = 0; i < 16; i++) s += (a[i] == w[i]) ? 1 : -1;
    return 16'(s);
  endfunction

  task automatic chk(string what, word_t got, word_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  initial begin
    word_t w;
    mode = MODE_BF16; w_load = 0; w_in = 0; a_in = 0; p_in = 0; av_in = 0; pv_in = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int phase = 0; phase < 4; phase++) begin
      mode_e m;
      m = (phase % 2) ? MODE_BINARY : MODE_BF16;
      w = (m == MODE_BINARY) ? 16'($urandom) : rnd_bf(115, 139);
      @(negedge clk);
      mode = m; w_load = 1; w_in = w;
      @(negedge clk);
      w_load = 0; w_in = 16'($urandom);   // must not change the weight
      repeat (200) begin
        word_t a, p, e;
        logic av, pv;
        if (m == MODE_BINARY) begin
          a = 16'($urandom);
          p = 16'($signed(int'($urandom_range(1000)) - 500));
          e = bin_ref(a, w, p);
        end else begin
          a = rnd_bf(115, 139);
          p = rnd_bf(110, 145);
          e = fma(a, w, p);
        end
        av = 1'($urandom); pv = 1'($urandom);
        a_in = a; p_in = p; av_in = av; pv_in = pv;
        @(posedge clk);
        #1;
        chk("psum", p_out, e);
        chk("act", a_out, a);
        chk("valid", {15'd0, av_out}, {15'd0, av});
        chk("pvalid", {15'd0, pv_out}, {15'd0, pv});
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
