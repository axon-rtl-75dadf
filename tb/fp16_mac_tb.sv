// fp16_mac_tb -- self-checking test of the FP16 fused multiply-add.
//
// Random operands with exponents in a band where the binary64 reference is
// exact are compared bit for bit with fp16_ref_pkg::ref_fma. Directed cases
// cover zero operands, exact cancellation, a rounding tie, overflow to Inf,
// flush-to-zero and the NaN rules. The unit is combinational; a 1 ns step
// separates vectors.
module fp16_mac_tb;
  import fp16_ref_pkg::*;

  logic [15:0] a, b, c, y;
  int checks = 0, failures = 0;

  fp16_mac dut (.a(a), .b(b), .c(c), .y(y));

  task automatic check(logic [15:0] ta, logic [15:0] tb_, logic [15:0] tc, logic [15:0] exp_y);
    a = ta; b = tb_; c = tc;
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10)
        $display("FAIL a=%h b=%h c=%h y=%h expected=%h", ta, tb_, tc, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] ra, rb, rc;
    // Directed cases
    check(16'h3C00, 16'h3C00, 16'h0000, 16'h3C00);  // 1*1+0 = 1
    check(16'h4000, 16'h4200, 16'h3C00, 16'h4700);  // 2*3+1 = 7
    check(16'h3C00, 16'h3C00, 16'hBC00, 16'h0000);  // 1*1-1 = +0
    check(16'h0000, 16'h7BFF, 16'h4500, 16'h4500);  // 0*max+5 = 5
    check(16'h3C01, 16'h3C01, 16'h0000, 16'h3C02);  // (1+2^-10)^2 rounds to 1+2^-9
    check(16'h3C00, 16'h1000, 16'h4000, 16'h4000);  // 2 + 2^-11: below half ulp, stays 2
    check(16'h3C00, 16'h1400, 16'h4000, 16'h4000);  // 2 + 2^-10: tie, even -> 2
    check(16'h3C00, 16'h1400, 16'h4001, 16'h4002);  // tie, odd -> round up
    check(16'h7BFF, 16'h4000, 16'h0000, 16'h7C00);  // overflow -> +Inf
    check(16'h0400, 16'h3800, 16'h0000, 16'h0000);  // 2^-15 flushes to zero
    check(16'h7C00, 16'h0000, 16'h0000, 16'h7E00);  // Inf*0 = NaN
    check(16'h7C00, 16'h3C00, 16'hFC00, 16'h7E00);  // Inf - Inf = NaN
    check(16'hFC00, 16'h3C00, 16'h3C00, 16'hFC00);  // -Inf*1 + 1 = -Inf
    check(16'h3C00, 16'h3C00, 16'h7E01, 16'h7E00);  // NaN addend
    // Random, exact-reference band
    for (int i = 0; i < 20000; i++) begin
      ra = rand_fp16(8, 22);
      rb = rand_fp16(8, 22);
      rc = ($urandom_range(9) == 0) ? 16'h0000 : rand_fp16(4, 26);
      check(ra, rb, rc, ref_fma(ra, rb, rc));
    end
    // Near-cancellation
    for (int i = 0; i < 5000; i++) begin
      ra = rand_fp16(13, 17);
      rb = 16'h3C00;
      rc = {~ra[15], ra[14:4], 4'($urandom)};
      check(ra, rb, rc, ref_fma(ra, rb, rc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
