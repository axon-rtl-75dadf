// axon_workload_tb -- runs workloads from the paper's evaluation on the
// full-size accelerator (default parameters) and checks every result.
//
//   GEMM_0   M = 128, K = 10, N = 128: all 64 output tiles.
//   MV       M = 1024, K = 128, N = 1 (matrix-vector): all 64 tiles; the
//            IFMAP buffer is reloaded with the next 16 rows of the matrix
//            before each tile, as a host would stream them.
//   DW-Conv  7 x 7 IFMAP, 3 x 3 depthwise filters (the smallest depthwise
//            layer of the paper's study): 32 of its 1024 channels, one
//            single-channel convolution per channel and output row, using
//            the on-chip im2col; only array column 0 holds a filter.
// Each tile must take K + 2N + 2 cycles; the testbench also prints the total
// cycles against the paper's Axon and conventional runtime models for the
// same tiles (2N + K - 1 and 3N + K - 2 per 16 x 16 tile).
module axon_workload_tb;
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
  longint tile_cycles = 0, model_axon = 0, model_sa = 0;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Buffer writes: one word per cycle, back to back.
  task automatic write_if(int addr, fp16_t v);
    @(negedge clk); if_we = 1; if_waddr = IF_AW'(addr); if_wdata = v;
  endtask
  task automatic write_fl(int addr, fp16_t v);
    @(negedge clk); fl_we = 1; fl_waddr = FL_AW'(addr); fl_wdata = v;
  endtask
  task automatic write_end();
    @(negedge clk); if_we = 0; fl_we = 0;
  endtask

  task automatic run_tile(tile_cmd_t c, int K);
    int t;
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    t = 1;
    while (!done) begin @(negedge clk); t++; end
    chk(t == K + 2 * N + 2, "tile runtime K + 2N + 2");
    tile_cycles += t;
    model_axon  += 2 * N + K - 1;
    model_sa    += 3 * N + K - 2;
  endtask

  task automatic read_row(int addr, output fp16_t row [N]);
    @(negedge clk); ob_re = 1; ob_raddr = OUT_AW'(addr);
    @(negedge clk); ob_re = 0;
    for (int j = 0; j < N; j++) row[j] = ob_rdata[16*j +: 16];
  endtask

  function automatic fp16_t val();
    return ($urandom_range(9) == 0) ? fp16_t'(16'h0000) : rand_fp16(12, 17);
  endfunction

  fp16_t GA [128][10], GB [10][128];
  fp16_t MA [16][128], MX [128];
  fp16_t DI [7][7], DF [3][3];

  initial begin
    tile_cmd_t c;
    fp16_t row [N], acc;
    int bad;

    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- GEMM_0: 128 x 10 x 128 ----------------
    for (int i = 0; i < 128; i++) for (int k = 0; k < 10; k++) begin
      GA[i][k] = val(); write_if(i * 10 + k, GA[i][k]);
    end
    for (int k = 0; k < 10; k++) for (int j = 0; j < 128; j++) begin
      GB[k][j] = val(); write_fl(k * 128 + j, GB[k][j]);
    end
    write_end();
    bad = 0;
    for (int ti = 0; ti < 8; ti++)
      for (int tj = 0; tj < 8; tj++) begin
        c = '0;
        c.mode = MODE_GEMM; c.k_len = 16'd10;
        c.a_base = 16'(ti * N * 10); c.a_stride = 16'd10;
        c.b_base = 16'(tj * N); c.b_stride = 16'd128; c.out_base = '0;
        run_tile(c, 10);
        for (int i = 0; i < N; i++) begin
          read_row(i, row);
          for (int j = 0; j < N; j++) begin
            acc = '0;
            for (int k = 9; k >= 0; k--)
              if (!fp16_is_zero(GA[ti*N+i][k]) && !fp16_is_zero(GB[k][tj*N+j]))
                acc = ref_fma(GA[ti*N+i][k], GB[k][tj*N+j], acc);
            chk(row[j] == acc, "GEMM_0 result");
          end
        end
      end
    $display("GEMM_0 done: %0d cycles in tiles (Axon model %0d, conventional model %0d)",
             tile_cycles, model_axon, model_sa);

    // ---------------- MV: 1024 x 128 x 1 ----------------
    tile_cycles = 0; model_axon = 0; model_sa = 0;
    for (int k = 0; k < 128; k++) begin
      MX[k] = val(); write_fl(k * N, MX[k]);      // x in column 0 of B
      for (int j = 1; j < N; j++) write_fl(k * N + j, 16'h0000);
    end
    write_end();
    for (int t = 0; t < 64; t++) begin
      for (int i = 0; i < N; i++) for (int k = 0; k < 128; k++) begin
        MA[i][k] = val(); write_if(i * 128 + k, MA[i][k]);
      end
      write_end();
      c = '0;
      c.mode = MODE_GEMM; c.k_len = 16'd128; c.a_base = '0; c.a_stride = 16'd128;
      c.b_base = '0; c.b_stride = 16'(N); c.out_base = 16'd16;
      run_tile(c, 128);
      for (int i = 0; i < N; i++) begin
        read_row(16 + i, row);
        acc = '0;
        for (int k = 127; k >= 0; k--)
          if (!fp16_is_zero(MA[i][k]) && !fp16_is_zero(MX[k])) acc = ref_fma(MA[i][k], MX[k], acc);
        chk(row[0] == acc, "MV result");
        chk(row[1] == 16'h0000, "MV unused column is zero");
      end
    end
    $display("MV 1024x128x1 done: %0d cycles in tiles (Axon model %0d, conventional model %0d)",
             tile_cycles, model_axon, model_sa);

    // ---------------- DW-Conv 7x7, 3x3, 32 channels ----------------
    tile_cycles = 0; model_axon = 0; model_sa = 0;
    for (int j = 1; j < N; j++) for (int k = 0; k < 9; k++) write_fl(64 + j * 9 + k, 16'h0000);
    write_end();
    for (int ch = 0; ch < 32; ch++) begin
      for (int y = 0; y < 7; y++) for (int x = 0; x < 7; x++) begin
        DI[y][x] = val(); write_if(y * 7 + x, DI[y][x]);
      end
      for (int r = 0; r < 3; r++) for (int s = 0; s < 3; s++) begin
        DF[r][s] = val(); write_fl(64 + r * 3 + s, DF[r][s]);
      end
      write_end();
      for (int oy = 0; oy < 5; oy++) begin
        c = '0;
        c.mode = MODE_CONV; c.flt_n = 8'd3; c.channels = 16'd1;
        c.ifm_w = 16'd7; c.ifm_h = 16'd7; c.ox0 = '0; c.oy = 16'(oy);
        c.a_base = '0; c.b_base = 16'd64; c.b_stride = 16'd9; c.out_base = 16'd48;
        run_tile(c, 9);
        for (int i = 0; i < 5; i++) begin
          read_row(48 + i, row);
          acc = '0;
          for (int r = 2; r >= 0; r--) for (int s = 2; s >= 0; s--)
            if (!fp16_is_zero(DI[oy + r][i + s]) && !fp16_is_zero(DF[r][s]))
              acc = ref_fma(DI[oy + r][i + s], DF[r][s], acc);
          chk(row[0] == acc, "DW-Conv result");
        end
      end
    end
    $display("DW-Conv 7x7 3x3 (32 channels) done: %0d cycles in tiles (Axon model %0d, conventional model %0d)",
             tile_cycles, model_axon, model_sa);
    chk(stat_reused > 0, "im2col used");
    chk(stat_gated > 0, "zero gating used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
