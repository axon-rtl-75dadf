// axon_top_tb -- end-to-end test of the Axon accelerator at its default
// size (16 x 16 array, default buffer depths, no parameter overrides).
//
// 1. GEMM: a 32 x 40 by 40 x 32 product with about 10 % zero operands is
//    computed as four 16 x 16 output tiles (scale-up tiling by the host,
//    using the command's base and stride fields).
// 2. Convolution with on-chip im2col: a 2 x 6 x 20 IFMAP and sixteen
//    2 x 3 x 3 filters give a 16 x 4 x 18 OFMAP, computed as eight tiles of
//    16 output pixels each; the IFMAP buffer holds the raw tensor only.
// 3. The 6 x 6 IFMAP / 3 x 3 filter example (4 x 4 OFMAP): one tile per
//    output row, the first four array rows checked.
// Every result is compared with a reference accumulated in the same order
// with one FP16 rounding per step (fp16_ref_pkg). Each tile must take
// K + 2N + 2 cycles from command to done. The testbench counts how often
// each mechanism occurred and fails if one never did: GEMM tiles,
// convolution tiles, mode switches, words passed by the im2col muxes,
// zero-gated MACs, and the IFMAP-read saving of im2col against the
// K * N reads a software-lowered operand would need.
module axon_top_tb;
  import axon_pkg::*;
  import fp16_ref_pkg::*;

  localparam int N = 16;
  localparam int IF_AW = 12, FL_AW = 12, OUT_AW = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              if_we = 0, fl_we = 0, ob_re = 0, cmd_valid = 0;
  logic [IF_AW-1:0]  if_waddr = '0;
  logic [FL_AW-1:0]  fl_waddr = '0;
  fp16_t             if_wdata = '0, fl_wdata = '0;
  logic [OUT_AW-1:0] ob_raddr = '0;
  logic [16*N-1:0]   ob_rdata;
  logic              cmd_ready, done;
  tile_cmd_t         cmd = '0;
  logic [31:0] stat_if_reads, stat_fl_reads, stat_reused, stat_tiles, stat_busy, stat_macs, stat_gated;

  axon_top dut (.*);

  int checks = 0, failures = 0;
  int n_gemm_tiles = 0, n_conv_tiles = 0, n_mode_switch = 0;
  tile_mode_e last_mode = MODE_GEMM;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_if(int addr, fp16_t v);
    @(negedge clk); if_we = 1; if_waddr = IF_AW'(addr); if_wdata = v;
    @(negedge clk); if_we = 0;
  endtask
  task automatic write_fl(int addr, fp16_t v);
    @(negedge clk); fl_we = 1; fl_waddr = FL_AW'(addr); fl_wdata = v;
    @(negedge clk); fl_we = 0;
  endtask

  function automatic fp16_t sparse_val();
    return ($urandom_range(9) == 0) ? fp16_t'(16'h0000) : rand_fp16(12, 17);
  endfunction

  task automatic run_tile(tile_cmd_t c);
    int K, t;
    K = (c.mode == MODE_CONV) ? int'(c.channels) * int'(c.flt_n) * int'(c.flt_n) : int'(c.k_len);
    if (c.mode != last_mode) n_mode_switch++;
    last_mode = c.mode;
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 0;
    t = 1;
    while (!done) begin @(negedge clk); t++; end
    chk(t == K + 2 * N + 2, "tile runtime K + 2N + 2 cycles");
    if (t != K + 2 * N + 2) $display("  tile took %0d cycles, expected %0d", t, K + 2 * N + 2);
    if (c.mode == MODE_CONV) n_conv_tiles++; else n_gemm_tiles++;
    @(negedge clk);
  endtask

  task automatic read_row(int addr, output fp16_t row [N]);
    @(negedge clk); ob_re = 1; ob_raddr = OUT_AW'(addr);
    @(negedge clk); ob_re = 0;
    for (int j = 0; j < N; j++) row[j] = ob_rdata[16*j +: 16];
  endtask

  // ---------------- GEMM ----------------
  localparam int GM = 32, GK = 40, GN = 32;
  fp16_t GA [GM][GK], GB [GK][GN], GC [GM][GN];

  // ---------------- Convolution ----------------
  localparam int CC = 2, CH = 6, CWD = 20, CF = 3, CNF = 16;
  localparam int COH = CH - CF + 1, COW = CWD - CF + 1;
  localparam int IF_CONV = 2048, FL_CONV = 2048;
  fp16_t IM [CC][CH][CWD], FT [CNF][CC][CF][CF];

  // reference output of filter f at pixel (oy, ox), reduction order c, r, s all counting down
  function automatic fp16_t conv_ref(int f, int oy, int ox, int nc, int n);
    fp16_t acc = '0;
    fp16_t a, b;
    for (int c = nc - 1; c >= 0; c--)
      for (int r = n - 1; r >= 0; r--)
        for (int s = n - 1; s >= 0; s--) begin
          a = IM[c][oy + r][ox + s];
          b = FT[f][c][r][s];
          if (!fp16_is_zero(a) && !fp16_is_zero(b)) acc = ref_fma(a, b, acc);
        end
    return acc;
  endfunction

  initial begin
    tile_cmd_t c;
    fp16_t row [N];
    fp16_t ex;
    int obase, bad;
    logic [31:0] rd0, rd_conv, k_conv_total;

    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- GEMM operands: A row-major at 0, B row-major at 0 ----
    for (int i = 0; i < GM; i++) for (int k = 0; k < GK; k++) begin
      GA[i][k] = sparse_val(); write_if(i * GK + k, GA[i][k]);
    end
    for (int k = 0; k < GK; k++) for (int j = 0; j < GN; j++) begin
      GB[k][j] = sparse_val(); write_fl(k * GN + j, GB[k][j]);
    end
    for (int i = 0; i < GM; i++) for (int j = 0; j < GN; j++) begin
      GC[i][j] = '0;
      for (int k = GK - 1; k >= 0; k--)
        if (!fp16_is_zero(GA[i][k]) && !fp16_is_zero(GB[k][j])) GC[i][j] = ref_fma(GA[i][k], GB[k][j], GC[i][j]);
    end
    for (int ti = 0; ti < GM / N; ti++)
      for (int tj = 0; tj < GN / N; tj++) begin
        c = '0;
        c.mode = MODE_GEMM; c.k_len = 16'(GK);
        c.a_base = 16'(ti * N * GK); c.a_stride = 16'(GK);
        c.b_base = 16'(tj * N);      c.b_stride = 16'(GN);
        c.out_base = 16'((ti * 2 + tj) * N);
        run_tile(c);
      end
    bad = 0;
    for (int ti = 0; ti < GM / N; ti++)
      for (int tj = 0; tj < GN / N; tj++)
        for (int i = 0; i < N; i++) begin
          read_row((ti * 2 + tj) * N + i, row);
          for (int j = 0; j < N; j++) begin
            ex = GC[ti * N + i][tj * N + j];
            chk(row[j] == ex, "GEMM result");
            if (row[j] != ex && bad++ < 5) $display("  C[%0d][%0d] %h expected %h", ti*N+i, tj*N+j, row[j], ex);
          end
        end

    // ---- Convolution: raw IFMAP [c][y][x] at IF_CONV, filters [f][c][r][s] at FL_CONV ----
    for (int ch = 0; ch < CC; ch++) for (int y = 0; y < CH; y++) for (int x = 0; x < CWD; x++) begin
      IM[ch][y][x] = sparse_val(); write_if(IF_CONV + (ch * CH + y) * CWD + x, IM[ch][y][x]);
    end
    for (int f = 0; f < CNF; f++) for (int ch = 0; ch < CC; ch++) for (int r = 0; r < CF; r++) for (int s = 0; s < CF; s++) begin
      FT[f][ch][r][s] = sparse_val(); write_fl(FL_CONV + ((f * CC + ch) * CF + r) * CF + s, FT[f][ch][r][s]);
    end
    rd0 = stat_if_reads;
    k_conv_total = 0;
    obase = 128;
    for (int oy = 0; oy < COH; oy++)
      for (int t = 0; t < 2; t++) begin
        c = '0;
        c.mode = MODE_CONV; c.flt_n = 8'(CF); c.channels = 16'(CC);
        c.ifm_w = 16'(CWD); c.ifm_h = 16'(CH);
        c.ox0 = 16'(t == 0 ? 0 : COW - N); c.oy = 16'(oy);
        c.a_base = 16'(IF_CONV); c.b_base = 16'(FL_CONV); c.b_stride = 16'(CC * CF * CF);
        c.out_base = 16'(obase + (oy * 2 + t) * N);
        run_tile(c);
        k_conv_total += 32'(CC * CF * CF);
      end
    rd_conv = stat_if_reads - rd0;
    // with im2col reuse: K reads for row 0 plus N-1 per filter row; software im2col: K*N
    chk(rd_conv == k_conv_total + k_conv_total / CF * (N - 1), "IFMAP reads with on-chip im2col");
    chk(rd_conv < k_conv_total * N, "im2col lowers IFMAP traffic");
    $display("conv IFMAP reads: %0d on-chip im2col vs %0d lowered operand (%0d%% saved)",
             rd_conv, k_conv_total * N, 100 - 100 * rd_conv / (k_conv_total * N));
    bad = 0;
    for (int oy = 0; oy < COH; oy++)
      for (int t = 0; t < 2; t++)
        for (int i = 0; i < N; i++) begin
          read_row(obase + (oy * 2 + t) * N + i, row);
          for (int f = 0; f < CNF; f++) begin
            ex = conv_ref(f, oy, (t == 0 ? 0 : COW - N) + i, CC, CF);
            chk(row[f] == ex, "CONV result");
            if (row[f] != ex && bad++ < 5) $display("  O[%0d][%0d][%0d] %h expected %h", f, oy, i, row[f], ex);
          end
        end

    // ---- The 6 x 6 / 3 x 3 example: single channel, 4 x 4 OFMAP, back to GEMM after ----
    for (int y = 0; y < 6; y++) for (int x = 0; x < 6; x++) begin
      IM[0][y][x] = rand_fp16(12, 17); write_if(3072 + y * 6 + x, IM[0][y][x]);
    end
    for (int f = 0; f < CNF; f++) for (int r = 0; r < 3; r++) for (int s = 0; s < 3; s++) begin
      FT[f][0][r][s] = rand_fp16(12, 17); write_fl(3072 + f * 9 + r * 3 + s, FT[f][0][r][s]);
    end
    for (int oy = 0; oy < 4; oy++) begin
      c = '0;
      c.mode = MODE_CONV; c.flt_n = 8'd3; c.channels = 16'd1;
      c.ifm_w = 16'd6; c.ifm_h = 16'd6; c.ox0 = '0; c.oy = 16'(oy);
      c.a_base = 16'd3072; c.b_base = 16'd3072; c.b_stride = 16'd9;
      c.out_base = 16'(obase + 128 - 4 * N + oy * N);
      run_tile(c);
      for (int i = 0; i < 4; i++) begin
        read_row(obase + 128 - 4 * N + oy * N + i, row);
        for (int f = 0; f < CNF; f++) chk(row[f] == conv_ref(f, oy, i, 1, 3), "6x6 example result");
      end
    end
    // one more GEMM tile after the convolutions (mode switch back)
    c = '0;
    c.mode = MODE_GEMM; c.k_len = 16'(GK); c.a_base = '0; c.a_stride = 16'(GK);
    c.b_base = '0; c.b_stride = 16'(GN); c.out_base = 16'd0;
    run_tile(c);
    read_row(5, row);
    for (int j = 0; j < N; j++) chk(row[j] == GC[5][j], "GEMM after CONV");

    // ---- mechanisms ----
    $display("mechanisms: gemm_tiles=%0d conv_tiles=%0d mode_switches=%0d im2col_reused_words=%0d zero_gated_macs=%0d macs=%0d",
             n_gemm_tiles, n_conv_tiles, n_mode_switch, stat_reused, stat_gated, stat_macs);
    chk(n_gemm_tiles > 0, "GEMM tiles ran");
    chk(n_conv_tiles > 0, "convolution tiles ran");
    chk(n_mode_switch >= 2, "mode switches happened");
    chk(stat_reused > 0, "im2col muxes passed words");
    chk(stat_gated > 0, "zero gating happened");
    chk(stat_tiles == 32'(n_gemm_tiles + n_conv_tiles), "tile counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
