// axon_ctrl_tb -- self-checking test of the Axon tile sequencer.
//
// Issues GEMM and convolution commands and checks, cycle by cycle, the
// read addresses and read enables of every IFMAP and FILTER port against
// addresses computed from the operand layouts (reduction fed from its last
// element down), the im2col select pattern
// (0 for one cycle, 1 for n-1), the valid/first tags one cycle behind the
// reads, the capture cycle (K + N + 1 cycles after the first read), the
// OUTPUT-buffer write addresses (bottom row first), the tile length of
// K + 2N + 2 cycles and the read statistics.
module axon_ctrl_tb;
  import axon_pkg::*;

  localparam int N = 16, IF_AW = 12, FL_AW = 12, OUT_AW = 8;
  localparam int CW = $clog2(N*N+1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, done;
  tile_cmd_t cmd;
  logic             if_re [N], fl_re [N];
  logic [IF_AW-1:0] if_raddr [N];
  logic [FL_AW-1:0] fl_raddr [N];
  logic feed_v, feed_f, im2col_sel, out_capture, ob_we;
  logic [OUT_AW-1:0] ob_waddr;
  logic [31:0] stat_if_reads, stat_fl_reads, stat_reused, stat_tiles, stat_busy, stat_macs, stat_gated;
  logic [CW-1:0] mac_count = '0, gated_count = '0;

  axon_ctrl #(.N(N), .IF_AW(IF_AW), .FL_AW(FL_AW), .OUT_AW(OUT_AW)) dut (.*);

  int checks = 0, failures = 0;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Runs one command; exp_* give the expected addresses per step.
  task automatic run(tile_cmd_t c);
    int K, n, step, t0, cap_t, t;
    int kc, kr, ks, exp_if, exp_fl, wr;
    logic sel_exp, prev_feed, prev_first, prev_sel;
    logic [31:0] ifr0;
    ifr0 = stat_if_reads;
    n = (c.mode == MODE_CONV) ? int'(c.flt_n) : 1;
    K = (c.mode == MODE_CONV) ? int'(c.channels) * n * n : int'(c.k_len);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    chk(cmd_ready, "ready while idle");
    @(negedge clk);
    cmd_valid = 0;
    step = 0; t = 0; cap_t = -1; wr = 0;
    prev_feed = 0; prev_first = 0; prev_sel = 0;
    while (!done && t < 10000) begin
      // tags lag the reads by one cycle
      chk(feed_v == prev_feed && feed_f == prev_first && im2col_sel == prev_sel, "tag alignment");
      chk(!cmd_ready, "not ready while busy");
      prev_feed = 0; prev_first = 0; prev_sel = 0;
      if (step < K) begin
        chk(if_re[0] && fl_re[N-1], "reads during feed");
        if (c.mode == MODE_CONV) begin
          kc = int'(c.channels) - 1 - step / (n * n); kr = n - 1 - (step / n) % n; ks = n - 1 - (step % n);
          sel_exp = (ks != n - 1);
          for (int i = 0; i < N; i++) begin
            exp_if = int'(c.a_base) + kc * int'(c.ifm_h) * int'(c.ifm_w)
                   + (int'(c.oy) + kr) * int'(c.ifm_w) + int'(c.ox0) + i + ks;
            exp_fl = int'(c.b_base) + i * int'(c.b_stride) + kc * n * n + kr * n + ks;
            chk(if_re[i] == (i == 0 || !sel_exp), "IFMAP read enable (im2col reuse)");
            if (if_re[i]) chk(if_raddr[i] == IF_AW'(exp_if), "IFMAP conv address");
            chk(fl_raddr[i] == FL_AW'(exp_fl), "FILTER conv address");
          end
        end else begin
          sel_exp = 0;
          for (int i = 0; i < N; i++) begin
            chk(if_re[i] && if_raddr[i] == IF_AW'(int'(c.a_base) + i * int'(c.a_stride) + K - 1 - step), "IFMAP gemm address");
            chk(fl_raddr[i] == FL_AW'(int'(c.b_base) + (K - 1 - step) * int'(c.b_stride) + i), "FILTER gemm address");
          end
        end
        prev_feed = 1; prev_first = (step == 0); prev_sel = sel_exp;
        step++;
      end else begin
        chk(!if_re[0] && !fl_re[0], "no reads after feed");
      end
      if (out_capture) begin
        chk(cap_t < 0, "single capture");
        cap_t = t;
      end
      if (ob_we) begin
        chk(ob_waddr == OUT_AW'(int'(c.out_base) + N - 1 - wr), "OUTPUT write address, bottom row first");
        wr++;
      end
      @(negedge clk);
      t++;
    end
    // the done cycle itself is the last write
    chk(ob_we && ob_waddr == OUT_AW'(c.out_base), "last write at done");
    chk(cap_t == K + N + 1, "capture K + N + 1 cycles after the first read");
    chk(t + 1 == K + 2 * N + 2, "tile length K + 2N + 2");
    if (t + 1 != K + 2 * N + 2) $display("  tile length %0d expected %0d", t + 1, K + 2 * N + 2);
    chk(wr + 1 == N, "N row writes");
    if (c.mode == MODE_CONV)
      chk(stat_if_reads - ifr0 == 32'(K + (N - 1) * K / n), "IFMAP reads with im2col reuse");
    else
      chk(stat_if_reads - ifr0 == 32'(K * N), "IFMAP reads in GEMM");
    @(negedge clk);
    chk(cmd_ready, "ready after done");
  endtask

  initial begin
    tile_cmd_t c;
    cmd_valid = 0; cmd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      c = '0;
      c.mode = MODE_GEMM; c.k_len = 16'(1 + $urandom_range(30));
      c.a_base = 16'($urandom_range(100)); c.a_stride = 16'(c.k_len + $urandom_range(3));
      c.b_base = 16'($urandom_range(100)); c.b_stride = 16'(N + $urandom_range(3));
      c.out_base = 16'($urandom_range(100));
      run(c);
    end
    for (int t = 0; t < 6; t++) begin
      c = '0;
      c.mode = MODE_CONV;
      c.flt_n = 8'(1 + $urandom_range(4));
      c.channels = 16'(1 + $urandom_range(3));
      c.ifm_w = 16'(N + c.flt_n + $urandom_range(4)); c.ifm_h = 16'(c.flt_n + 2 + $urandom_range(4));
      c.ox0 = 16'($urandom_range(int'(c.ifm_w) - N - int'(c.flt_n) + 1));
      c.oy = 16'($urandom_range(int'(c.ifm_h) - int'(c.flt_n)));
      c.a_base = 16'($urandom_range(50)); c.b_base = 16'($urandom_range(50));
      c.b_stride = 16'(int'(c.channels) * int'(c.flt_n) * int'(c.flt_n));
      c.out_base = 16'($urandom_range(100));
      run(c);
    end
    chk(stat_tiles == 12, "tile counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
