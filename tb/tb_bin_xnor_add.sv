// Self-checking test of bin_xnor_add: the result is compared with a dot
// product of +1/-1 values computed element by element.
module tb_bin_xnor_add;
  logic [15:0] act, wgt;
  logic signed [15:0] pin, pout;
  int checks = 0, failures = 0;

  bin_xnor_add dut (.act(act), .wgt(wgt), .psum_in(pin), .psum_out(pout));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) begin
      int dot;
      act = 16'($urandom);
      wgt = 16'($urandom);
      pin = 16'($signed(int'($urandom_range(2000)) - 1000));
      dot = 0;
      for (int i = 0; i < 16; i++) dot += ((act[i] ? 1 : -1) * (wgt[i] ? 1 : -1));
      #1;
      checks++;
      if (int'(pout) != int'(pin) + dot) begin
        failures++;
        if (failures < 10) $display("FAIL act=%h wgt=%h pin=%0d pout=%0d exp=%0d", act, wgt, pin, pout, int'(pin) + dot);
      end
    end
    act = 16'hFFFF; wgt = 16'hFFFF; pin = 0; #1; checks++; if (pout != 16) failures++;
    act = 16'h0000; wgt = 16'hFFFF; pin = 0; #1; checks++; if (pout != -16) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
