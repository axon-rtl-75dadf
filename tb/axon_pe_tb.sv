// axon_pe_tb -- self-checking test of the output-stationary Axon PE.
//
// Streams random dot products (with some zero operands) through a PE with
// its own operand registers and through one built without them (shared
// registers). Checks, against a reference computed with fp16_ref_pkg:
// the captured result, the one-cycle operand register latency, the
// zero-gating count, the restart on the `first` tag and the Output shift
// path (out_in -> out_q).
module axon_pe_tb;
  import axon_pkg::*;
  import fp16_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  fp16_t a_in, b_in, out_in;
  logic  av_in, af_in, out_capture;
  fp16_t a_q, b_q, out_q, a_q2, b_q2, out_q2;
  logic  av_q, af_q, mac_fire, gated, av_q2, af_q2, mac_fire2, gated2;
  int checks = 0, failures = 0;
  int gated_cnt = 0, gated_ref = 0;

  axon_pe dut (.clk, .rst_n, .a_in, .av_in, .af_in, .a_q, .av_q, .af_q,
               .b_in, .b_q, .out_capture, .out_in, .out_q, .mac_fire, .gated);
  axon_pe #(.OWN_A(1'b0), .OWN_B(1'b0)) dut_sh (
               .clk, .rst_n, .a_in, .av_in, .af_in, .a_q(a_q2), .av_q(av_q2), .af_q(af_q2),
               .b_in, .b_q(b_q2), .out_capture, .out_in, .out_q(out_q2),
               .mac_fire(mac_fire2), .gated(gated2));

  always @(posedge clk) if (gated) gated_cnt++;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp16_t av[64], bv[64], acc;
    int len;
    a_in = '0; b_in = '0; av_in = 0; af_in = 0; out_capture = 0; out_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      len = 1 + int'($urandom_range(40));
      acc = '0;
      for (int k = 0; k < len; k++) begin
        av[k] = ($urandom_range(7) == 0) ? fp16_t'(16'h0000) : rand_fp16(12, 17);
        bv[k] = ($urandom_range(7) == 0) ? fp16_t'(16'h8000) : rand_fp16(12, 17);
        if (fp16_is_zero(av[k]) || fp16_is_zero(bv[k])) begin
          gated_ref++;
          if (k == 0) acc = '0;
        end else
          acc = ref_fma(av[k], bv[k], (k == 0) ? fp16_t'(16'h0000) : acc);
      end
      for (int k = 0; k < len; k++) begin
        @(negedge clk);
        a_in = av[k]; b_in = bv[k]; av_in = 1; af_in = (k == 0);
        // shared-register PE sees the operand in the same cycle
        #1 chk(a_q2 == av[k] && b_q2 == bv[k], "shared operand pass-through");
        @(posedge clk); #1;
        chk(a_q == av[k] && b_q == bv[k] && av_q && (af_q == (k == 0)), "operand register");
      end
      @(negedge clk); av_in = 0; af_in = 0; a_in = rand_fp16(12, 17);
      @(negedge clk); out_capture = 1;
      @(negedge clk); out_capture = 0;
      chk(out_q == acc, "captured dot product");
      chk(out_q2 == acc, "captured dot product, shared-register PE");
      if (out_q != acc) $display("  got %h expected %h len %0d", out_q, acc, len);
      // shift path: Output takes out_in when not capturing
      out_in = rand_fp16(1, 30);
      @(negedge clk);
      chk(out_q == out_in, "output shift from PE above");
    end
    chk(gated_cnt == gated_ref, "zero-gating count");
    chk(gated_ref > 0, "zero gating happened");
    $display("gated MACs: %0d", gated_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
