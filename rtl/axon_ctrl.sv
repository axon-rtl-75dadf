// axon_ctrl -- tile sequencer of the Axon accelerator.
//
// One command computes one N x N output tile. The controller
//   FEED     issues K reads per feeder row and column, one k per cycle, with
//            no skew (Axon feeds every diagonal PE in the same cycle);
//   DRAIN    waits N + 1 cycles until the PE farthest from the diagonal
//            (N - 1 hops) has done its last MAC;
//   CAPTURE  copies every Psum into the Output registers;
//   READOUT  writes the N result rows, bottom row first, into the OUTPUT
//            buffer, one row per cycle.
// A tile therefore takes K + 2N + 2 cycles from the first read to the last
// write: the paper's Axon runtime for a square tile, max(M,N) + M + K - 1
// with M = N, plus three pipeline cycles of this design (buffer read, feeder
// register, capture).
//
// Operand addressing (this design's choice of layout):
//   The reduction is fed from its last element to its first, as in the
//   paper's examples (its 3x3 GEMM starts with A13*B31, its im2col
//   walk-through with the bottom-right pixel of each window).
//   GEMM  step t reads k = K-1-t: row i reads A[i][k] at
//         a_base + i*a_stride + k, column j reads B[k][j] at
//         b_base + k*b_stride + j.
//   CONV  (im2col on chip, stride 1, no padding) array row i computes output
//         pixel (oy, ox0 + i), column j filter j. The reduction index runs
//         over channel c, filter row r and filter column s, all counting
//         down (s fastest), so each window is fed right to left, bottom to
//         top, as in the paper's walk-through. Row i needs IFMAP[c][oy+r][ox0+i+s]; the
//         word row i needs at step s is the one row i-1 held at step s+1.
//         So at s = n-1 every row reads the IFMAP buffer and the im2col
//         select is 0; for the other n-1 steps only row 0 reads and the
//         select is 1 (rows 1..N-1 take the upper feeder PE's register).
//         This is the paper's control rule: 0 for one cycle, 1 for n-1.
//         Filter j is stored flattened as [c][r][s] at b_base + j*b_stride.
//
// The select, valid and first tags leave the controller one cycle after the
// reads, aligned with the read data. Statistics count buffer reads (to show
// the traffic saved by im2col), words passed by the im2col muxes, tiles,
// busy cycles, MACs and zero-gated MACs.
//
// Handshake: cmd is taken when cmd_valid and cmd_ready are both high;
// cmd_ready is high only while idle; done pulses for one cycle at the end.
module axon_ctrl
  import axon_pkg::*;
#(
  parameter int unsigned N      = 16,
  parameter int unsigned IF_AW  = 12,   // IFMAP buffer address width
  parameter int unsigned FL_AW  = 12,   // FILTER buffer address width
  parameter int unsigned OUT_AW = 8,    // OUTPUT buffer address width
  localparam int unsigned CW    = $clog2(N*N+1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // command
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  tile_cmd_t        cmd,
  output logic             done,
  // IFMAP buffer reads, one port per feeder row
  output logic             if_re    [N],
  output logic [IF_AW-1:0] if_raddr [N],
  // FILTER buffer reads, one port per column
  output logic             fl_re    [N],
  output logic [FL_AW-1:0] fl_raddr [N],
  // array control, aligned with the read data
  output logic             feed_v,
  output logic             feed_f,
  output logic             im2col_sel,
  output logic             out_capture,
  // OUTPUT buffer write (data is the array's bottom row)
  output logic              ob_we,
  output logic [OUT_AW-1:0] ob_waddr,
  // activity from the array
  input  logic [CW-1:0]    mac_count,
  input  logic [CW-1:0]    gated_count,
  // statistics
  output logic [31:0]      stat_if_reads,
  output logic [31:0]      stat_fl_reads,
  output logic [31:0]      stat_reused,
  output logic [31:0]      stat_tiles,
  output logic [31:0]      stat_busy,
  output logic [31:0]      stat_macs,
  output logic [31:0]      stat_gated
);

  typedef enum logic [2:0] {S_IDLE, S_FEED, S_DRAIN, S_CAPTURE, S_READOUT} state_e;

  state_e     state_q;
  tile_cmd_t  cmd_q;
  logic [DIM_W-1:0]  k_q, k_total_q, wait_q;
  logic [7:0]        s_q, r_q;           // conv: filter column and row (down-counting)
  logic [ADDR_W-1:0] line_q;             // conv: address of IFMAP[c][oy+r][ox0]
  logic [ADDR_W-1:0] fline_q;            // conv: c*n*n + r*n
  logic [ADDR_W-1:0] bline_q;            // gemm: b_base + (K-1-k)*b_stride
  logic              conv, all_rows;
  logic [DIM_W-1:0]  k_total;

  assign conv      = (cmd_q.mode == MODE_CONV);
  assign cmd_ready = (state_q == S_IDLE);
  // Rows 1..N-1 read the buffer on every GEMM step, and on the first step of
  // each filter row in CONV.
  assign all_rows  = !conv || (s_q == cmd_q.flt_n - 8'd1);
  assign k_total   = (cmd.mode == MODE_CONV)
                   ? DIM_W'(cmd.channels * cmd.flt_n * cmd.flt_n) : cmd.k_len;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      cmd_q     <= '0;
      k_q       <= '0;
      k_total_q <= '0;
      wait_q    <= '0;
      s_q       <= '0;
      r_q       <= '0;
      line_q    <= '0;
      fline_q   <= '0;
      bline_q   <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (cmd_valid) begin
          // The reduction starts from its last element (k = K-1; in CONV
          // c = C-1, r = n-1, s = n-1) and runs down to the first.
          state_q   <= S_FEED;
          cmd_q     <= cmd;
          k_q       <= '0;
          k_total_q <= k_total;
          s_q       <= cmd.flt_n - 8'd1;
          r_q       <= cmd.flt_n - 8'd1;
          line_q    <= ADDR_W'(cmd.a_base
                              + (cmd.channels - 1'b1) * cmd.ifm_h * cmd.ifm_w
                              + (cmd.oy + DIM_W'(cmd.flt_n) - 1'b1) * cmd.ifm_w
                              + cmd.ox0);
          fline_q   <= ADDR_W'((cmd.channels - 1'b1) * cmd.flt_n * cmd.flt_n
                               + ADDR_W'(cmd.flt_n - 8'd1) * ADDR_W'(cmd.flt_n));
          bline_q   <= ADDR_W'(cmd.b_base + (k_total - 1'b1) * cmd.b_stride);
        end
        S_FEED: begin
          k_q     <= k_q + 1'b1;
          bline_q <= bline_q - cmd_q.b_stride;
          if (s_q == 8'd0) begin
            s_q     <= cmd_q.flt_n - 8'd1;
            fline_q <= fline_q - ADDR_W'(cmd_q.flt_n);
            if (r_q == 8'd0) begin
              r_q    <= cmd_q.flt_n - 8'd1;
              line_q <= line_q - ADDR_W'(cmd_q.ifm_w * cmd_q.ifm_h)
                               + ADDR_W'(cmd_q.flt_n - 8'd1) * cmd_q.ifm_w;
            end else begin
              r_q    <= r_q - 8'd1;
              line_q <= line_q - ADDR_W'(cmd_q.ifm_w);
            end
          end else begin
            s_q <= s_q - 8'd1;
          end
          if (k_q == k_total_q - 1'b1) begin
            state_q <= S_DRAIN;
            wait_q  <= '0;
          end
        end
        S_DRAIN: begin
          wait_q <= wait_q + 1'b1;
          if (wait_q == DIM_W'(N)) state_q <= S_CAPTURE;
        end
        S_CAPTURE: begin
          state_q <= S_READOUT;
          wait_q  <= '0;
        end
        S_READOUT: begin
          wait_q <= wait_q + 1'b1;
          if (wait_q == DIM_W'(N - 1)) state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Buffer read ports
  for (genvar i = 0; i < N; i++) begin : g_rd
    always_comb begin
      if (conv) begin
        if_raddr[i] = IF_AW'(line_q + ADDR_W'(i) + ADDR_W'(s_q));
        fl_raddr[i] = FL_AW'(cmd_q.b_base + ADDR_W'(i) * cmd_q.b_stride + fline_q + ADDR_W'(s_q));
      end else begin
        if_raddr[i] = IF_AW'(cmd_q.a_base + ADDR_W'(i) * cmd_q.a_stride + ADDR_W'(k_total_q - 1'b1 - k_q));
        fl_raddr[i] = FL_AW'(bline_q + ADDR_W'(i));
      end
      if_re[i] = (state_q == S_FEED) && (i == 0 || all_rows);
      fl_re[i] = (state_q == S_FEED);
    end
  end

  // Tags, aligned with the read data (one cycle after the read)
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      feed_v     <= 1'b0;
      feed_f     <= 1'b0;
      im2col_sel <= 1'b0;
    end else begin
      feed_v     <= (state_q == S_FEED);
      feed_f     <= (state_q == S_FEED) && (k_q == '0);
      im2col_sel <= (state_q == S_FEED) && !all_rows;
    end

  assign out_capture = (state_q == S_CAPTURE);
  assign ob_we       = (state_q == S_READOUT);
  assign ob_waddr    = OUT_AW'(cmd_q.out_base + ADDR_W'(N - 1) - ADDR_W'(wait_q));
  assign done        = (state_q == S_READOUT) && (wait_q == DIM_W'(N - 1));

  // Statistics
  logic [$clog2(N+1)-1:0] if_reads_now;
  always_comb begin
    if_reads_now = '0;
    for (int i = 0; i < N; i++) if_reads_now += $bits(if_reads_now)'(if_re[i]);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      stat_if_reads <= '0;
      stat_fl_reads <= '0;
      stat_reused   <= '0;
      stat_tiles    <= '0;
      stat_busy     <= '0;
      stat_macs     <= '0;
      stat_gated    <= '0;
    end else begin
      stat_if_reads <= stat_if_reads + 32'(if_reads_now);
      stat_fl_reads <= stat_fl_reads + ((state_q == S_FEED) ? 32'(N) : 32'd0);
      stat_reused   <= stat_reused + (im2col_sel ? 32'(N - 1) : 32'd0);
      stat_tiles    <= stat_tiles + 32'(done);
      stat_busy     <= stat_busy + 32'(state_q != S_IDLE);
      stat_macs     <= stat_macs + 32'(mac_count);
      stat_gated    <= stat_gated + 32'(gated_count);
    end

  // A command must be well formed.
  a_cmd_k: assert property (@(posedge clk) disable iff (!rst_n)
                            cmd_valid && cmd_ready |-> k_total != '0)
    else $error("axon_ctrl: command with an empty reduction");
  a_cmd_n: assert property (@(posedge clk) disable iff (!rst_n)
                            cmd_valid && cmd_ready && cmd.mode == MODE_CONV |-> cmd.flt_n != 8'd0)
    else $error("axon_ctrl: convolution command with filter length 0");

endmodule
