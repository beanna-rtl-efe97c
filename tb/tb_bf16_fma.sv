// Self-checking test of bf16_fma against the real-number reference: directed
// cases (exact values, cancellation, rounding ties, zeros, infinities, NaN,
// overflow, underflow) and random operands in moderate exponent ranges.
module tb_bf16_fma;
  import bf16_ref_pkg::*;

  logic [15:0] a, b, c, y;
  int checks = 0, failures = 0;

  bf16_fma dut (.a(a), .b(b), .c(c), .y(y));

  task automatic check(logic [15:0] ta, logic [15:0] tb_, logic [15:0] tc, logic [15:0] exp);
    a = ta; b = tb_; c = tc;
    #1;
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL a=%h b=%h c=%h y=%h exp=%h", ta, tb_, tc, y, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // directed, expected values worked out by hand
    check(16'h3F80, 16'h3F80, 16'h0000, 16'h3F80);  // 1*1+0 = 1
    check(16'h4000, 16'h4040, 16'h3F80, 16'h40E0);  // 2*3+1 = 7
    check(16'h3F80, 16'h3F80, 16'hBF80, 16'h0000);  // 1-1 = +0
    check(16'h0000, 16'h4000, 16'h4040, 16'h4040);  // 0*2+3 = 3
    check(16'h8000, 16'h3F80, 16'h8000, 16'h8000);  // -0 + -0 = -0
    check(16'h3F80, 16'h3F81, 16'h0000, 16'h3F81);
    check(16'h3F81, 16'h3F81, 16'h0000, 16'h3F82);  // (1+2^-7)^2 = 1+2^-6+2^-14 -> 3F82
    check(16'h3F80, 16'h3F80, 16'h3B80, 16'h3F80);  // 1 + 2^-8: tie, to even 1.0
    check(16'h3F80, 16'h3F81, 16'h3B80, 16'h3F82);  // 1+2^-7+2^-8: tie, up to even
    check(16'h7F80, 16'h3F80, 16'h3F80, 16'h7F80);  // inf
    check(16'h7F80, 16'h0000, 16'h3F80, 16'h7FC0);  // inf*0
    check(16'h7F80, 16'h3F80, 16'hFF80, 16'h7FC0);  // inf-inf
    check(16'h7FC1, 16'h3F80, 16'h3F80, 16'h7FC0);  // NaN
    check(16'h7F00, 16'h4000, 16'h0000, 16'h7F80);  // overflow
    check(16'h0080, 16'h3F00, 16'h0000, 16'h0000);  // underflow flush
    check(16'h4000, 16'h4000, 16'hC080, 16'h0000);  // 4-4
    check(16'h3F80, 16'h3F80, 16'hBF7F, 16'h3B80);  // 1-(1-2^-8) = 2^-8
    // random against the reference
    repeat (20000) begin
      logic [15:0] ra, rb, rc;
      ra = rnd_bf(112, 142);
      rb = rnd_bf(112, 142);
      rc = rnd_bf(105, 150);
      if ($urandom_range(7) == 0) begin
        // near cancellation: addend close to -(a*b)
        rc = fma(ra, rb, 16'h0000) ^ 16'h8000;
        rc[1:0] = 2'($urandom);
      end
      check(ra, rb, rc, fma(ra, rb, rc));
    end
    // additions with b = 1.0, as the accumulator uses it
    repeat (5000) begin
      logic [15:0] ra, rc;
      ra = rnd_bf(110, 140);
      rc = rnd_bf(110, 140);
      check(ra, 16'h3F80, rc, fma(ra, 16'h3F80, rc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
