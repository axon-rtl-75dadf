// axon_array_tb -- self-checking test of the Axon N x N array (N = 16).
//
// For several random GEMM tiles (A: N x K, B: K x N, some zero operands) the
// testbench feeds A[i][k] and B[k][j] to the diagonal all in the same cycle,
// k = 0..K-1, with no skew, then captures and drains the results through the
// bottom row and compares every C[i][j] with a reference dot product
// accumulated in the same order with one rounding per step.
// Timing checks: the span from the first to the last cycle with a MAC must be
// exactly K + N - 1 (Axon's N - 1 fill plus K), the readout must deliver
// row N-1 first and row 0 last in N cycles, and the MAC and zero-gating
// counts must match the number of non-zero and zero operand pairs.
module axon_array_tb;
  import axon_pkg::*;
  import fp16_ref_pkg::*;

  localparam int N = 16;
  localparam int KMAX = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  fp16_t feed_a [N], feed_b [N], diag_a_q [N], out_row [N];
  logic  feed_v, feed_f, out_capture;
  logic [$clog2(N*N+1)-1:0] mac_count, gated_count;

  axon_array #(.N(N)) dut (.clk, .rst_n, .feed_a, .feed_b, .feed_v, .feed_f,
                           .diag_a_q, .out_capture, .out_row, .mac_count, .gated_count);

  int checks = 0, failures = 0;
  int cyc = 0, first_mac = -1, last_mac = -1;
  longint macs = 0, gates = 0;

  always @(posedge clk) begin
    cyc++;
    if (mac_count != 0) begin
      if (first_mac < 0) first_mac = cyc;
      last_mac = cyc;
    end
    macs  += mac_count;
    gates += gated_count;
  end

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  fp16_t A [N][KMAX], B [KMAX][N], C [N][N];

  initial begin
    int K;
    longint exp_macs, exp_gates;
    feed_v = 0; feed_f = 0; out_capture = 0;
    foreach (feed_a[i]) begin feed_a[i] = '0; feed_b[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      K = (t == 0) ? 3 : (t == 1) ? 1 : 1 + int'($urandom_range(KMAX - 1));
      exp_macs = 0; exp_gates = 0;
      for (int i = 0; i < N; i++)
        for (int k = 0; k < K; k++) begin
          A[i][k] = ($urandom_range(9) == 0) ? fp16_t'(16'h0000) : rand_fp16(12, 17);
          B[k][i] = ($urandom_range(9) == 0) ? fp16_t'(16'h0000) : rand_fp16(12, 17);
        end
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          C[i][j] = '0;
          for (int k = 0; k < K; k++)
            if (fp16_is_zero(A[i][k]) || fp16_is_zero(B[k][j])) exp_gates++;
            else begin
              exp_macs++;
              C[i][j] = ref_fma(A[i][k], B[k][j], (k == 0) ? fp16_t'(16'h0000) : C[i][j]);
            end
        end
      macs = 0; gates = 0; first_mac = -1; last_mac = -1;
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        for (int i = 0; i < N; i++) begin feed_a[i] = A[i][k]; feed_b[i] = B[k][i]; end
        feed_v = 1; feed_f = (k == 0);
      end
      @(negedge clk);
      feed_v = 0; feed_f = 0;
      foreach (feed_a[i]) begin feed_a[i] = rand_fp16(12, 17); feed_b[i] = rand_fp16(12, 17); end
      repeat (N + 1) @(negedge clk);
      chk(last_mac - first_mac + 1 == K + N - 1, "fill + compute span K + N - 1");
      if (last_mac - first_mac + 1 != K + N - 1)
        $display("  span %0d expected %0d", last_mac - first_mac + 1, K + N - 1);
      chk(macs == exp_macs, "MAC count");
      chk(gates == exp_gates, "zero-gated count");
      out_capture = 1;
      @(negedge clk);
      out_capture = 0;
      for (int r = N - 1; r >= 0; r--) begin
        for (int j = 0; j < N; j++) begin
          chk(out_row[j] == C[r][j], "result element");
          if (out_row[j] != C[r][j] && failures < 10)
            $display("  C[%0d][%0d] = %h expected %h (K=%0d)", r, j, out_row[j], C[r][j], K);
        end
        @(negedge clk);
      end
      // after N shifts the column holds the zeros shifted in at the top
      chk(out_row[0] == 16'h0000, "readout drained");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
