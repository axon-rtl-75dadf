// axon_im2col_feed_tb -- self-checking test of the im2col multiplexers.
//
// Part 1 replays the paper's 6 x 6 IFMAP / 3 x 3 filter walk-through with
// four array rows (convolution windows 0..3 of the first output row). The
// testbench models the feeder PEs' Input registers, gives the buffer value
// only where a real buffer would be read (every row when the select is 0,
// row 0 only otherwise; other rows see junk) and checks that each row
// receives its window right to left, against the window table printed in
// the paper's im2col figure. Part 2 checks the mux rule on random data.
module axon_im2col_feed_tb;
  import axon_pkg::*;

  localparam int ROWS = 4;

  fp16_t buf_a [ROWS], diag_a_q [ROWS], feed_a [ROWS];
  logic  sel;
  int checks = 0, failures = 0;

  axon_im2col_feed #(.ROWS(ROWS)) dut (.buf_a, .diag_a_q, .sel, .feed_a);

  // Windows as printed (IFMAP pixels numbered 1..36 row-major), left to right.
  int win [ROWS][9] = '{
    '{1, 2, 3, 7, 8, 9, 13, 14, 15},
    '{2, 3, 4, 8, 9, 10, 14, 15, 16},
    '{3, 4, 5, 9, 10, 11, 15, 16, 17},
    '{4, 5, 6, 10, 11, 12, 16, 17, 18}};

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
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
    int s, r;
    foreach (diag_a_q[i]) diag_a_q[i] = '0;
    for (int t = 0; t < 9; t++) begin
      s = 2 - t % 3;
      r = 2 - t / 3;
      sel = (t % 3 != 0);
      for (int i = 0; i < ROWS; i++)
        buf_a[i] = (i == 0 || !sel) ? fp16_t'(1 + r * 6 + i + s) : fp16_t'(16'hDEAD);
      #1;
      for (int i = 0; i < ROWS; i++) begin
        chk(feed_a[i] == fp16_t'(win[i][8 - t]), "window element order");
        if (feed_a[i] != fp16_t'(win[i][8 - t]))
          $display("  step %0d row %0d got %0d expected %0d", t, i, feed_a[i], win[i][8 - t]);
      end
      // feeder Input registers take feed_a at the clock edge
      for (int i = 0; i < ROWS; i++) diag_a_q[i] = feed_a[i];
      #1;
    end
    for (int t = 0; t < 1000; t++) begin
      sel = 1'($urandom);
      foreach (buf_a[i]) begin buf_a[i] = fp16_t'($urandom); diag_a_q[i] = fp16_t'($urandom); end
      #1;
      chk(feed_a[0] == buf_a[0], "row 0 always from buffer");
      for (int i = 1; i < ROWS; i++)
        chk(feed_a[i] == (sel ? diag_a_q[i-1] : buf_a[i]), "mux rule");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
