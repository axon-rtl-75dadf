// axon_array -- N x N output-stationary systolic array with Axon data
// orchestration.
//
// Operands enter only through the PEs on the principal diagonal (the feeder
// PEs): row operand A[i][k] enters PE (i, i) and column operand B[k][j] enters
// PE (j, j), all in the same cycle and without the skew a conventional
// systolic array needs. From a feeder PE the row operand travels both left and
// right along its row and the column operand both up and down its column;
// every other PE passes an operand on in the direction it arrived from. PE
// (i, j) is |i - j| hops from both of its feeders, so A[i][k] and B[k][j]
// meet there in the same cycle, and the farthest PE is reached after N - 1
// hops instead of the 2N - 2 of the conventional array. PE (i, j) accumulates
// C[i][j] = sum_k A[i][k] * B[k][j].
//
// The two PEs beside a feeder receive the same operand in the same cycle, so
// (as in the paper's 16x16 implementation) they share one register: PE
// (i, i-1) uses the Input register of PE (i, i+1) and PE (j-1, j) uses the
// Weight register of PE (j+1, j). Only the corner feeders, which have one
// neighbour per direction, have no partner.
//
// Readout: out_capture copies every Psum into its Output register; on the
// following cycles the Output registers shift down one row per cycle, so
// out_row shows row N-1, N-2, ..., 0 of the result in N consecutive cycles.
//
// Timing: values on feed_a/feed_b/feed_v/feed_f are registered by the
// feeder PEs at the next clock edge; a PE d hops from the diagonal updates
// its Psum d + 1 edges after the feed. With a K-long operand stream the last
// MAC happens K + N - 1 cycles after the first one (N - 1 fill + K).
//
// The array is square, the paper's main configuration. The paper's extension
// to rectangular arrays (extra columns fed from the bottom with zero padding)
// is not built here. diag_a_q exposes the feeders' Input registers for the
// im2col multiplexers.
module axon_array
  import axon_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  fp16_t feed_a [N],     // row operand into feeder PE (i, i)
  input  fp16_t feed_b [N],     // column operand into feeder PE (j, j)
  input  logic  feed_v,         // operands valid
  input  logic  feed_f,         // first element of a new dot product
  output fp16_t diag_a_q [N],   // Input register of feeder PE (i, i)
  input  logic  out_capture,
  output fp16_t out_row [N],    // Output registers of the bottom row
  output logic [$clog2(N*N+1)-1:0] mac_count,   // MACs performed this cycle
  output logic [$clog2(N*N+1)-1:0] gated_count  // MACs skipped by zero gating
);

  // Per-PE activity, gathered for the counters. The operand and output
  // nets are declared inside each PE's generate block, so that no array
  // variable spans the whole grid (one whole-grid array would look to a
  // simulator like a combinational loop through the shared registers).
  logic  fire  [N][N];
  logic  gate  [N][N];

  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      // PE (i, i-1) borrows the Input register of PE (i, i+1);
      // PE (j-1, j) borrows the Weight register of PE (j+1, j).
      localparam bit SHARE_A = (j + 1 == i) && (i + 1 < N);
      localparam bit SHARE_B = (i + 1 == j) && (j + 1 < N);

      fp16_t a_in, b_in, o_in, a_o, b_o, o_o;
      logic  av_in, af_in, av_o, af_o;

      if (j == i) begin : g_a_feed
        assign a_in = feed_a[i]; assign av_in = feed_v; assign af_in = feed_f;
      end else if (SHARE_A) begin : g_a_share
        assign a_in = g_row[i].g_col[j+2].a_o; assign av_in = g_row[i].g_col[j+2].av_o; assign af_in = g_row[i].g_col[j+2].af_o;
      end else if (j > i) begin : g_a_right
        assign a_in = g_row[i].g_col[j-1].a_o; assign av_in = g_row[i].g_col[j-1].av_o; assign af_in = g_row[i].g_col[j-1].af_o;
      end else begin : g_a_left
        assign a_in = g_row[i].g_col[j+1].a_o; assign av_in = g_row[i].g_col[j+1].av_o; assign af_in = g_row[i].g_col[j+1].af_o;
      end

      if (i == j) begin : g_b_feed
        assign b_in = feed_b[j];
      end else if (SHARE_B) begin : g_b_share
        assign b_in = g_row[i+2].g_col[j].b_o;
      end else if (i > j) begin : g_b_down
        assign b_in = g_row[i-1].g_col[j].b_o;
      end else begin : g_b_up
        assign b_in = g_row[i+1].g_col[j].b_o;
      end

      if (i == 0) begin : g_o_top
        assign o_in = '0;
      end else begin : g_o_chain
        assign o_in = g_row[i-1].g_col[j].o_o;
      end

      axon_pe #(.OWN_A(!SHARE_A), .OWN_B(!SHARE_B)) u_pe (
        .clk, .rst_n,
        .a_in, .av_in, .af_in,
        .a_q(a_o), .av_q(av_o), .af_q(af_o),
        .b_in, .b_q(b_o),
        .out_capture, .out_in(o_in), .out_q(o_o),
        .mac_fire(fire[i][j]), .gated(gate[i][j])
      );
    end
    assign diag_a_q[i] = g_row[i].g_col[i].a_o;
    assign out_row[i]  = g_row[N-1].g_col[i].o_o;
  end

  always_comb begin
    mac_count   = '0;
    gated_count = '0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        mac_count   += $bits(mac_count)'(fire[i][j]);
        gated_count += $bits(gated_count)'(gate[i][j]);
      end
  end

endmodule
