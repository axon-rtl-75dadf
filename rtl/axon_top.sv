// axon_top -- the Axon accelerator: a 16 x 16 output-stationary FP16
// systolic array with diagonal feeding, on-chip im2col and zero gating.
//
// Blocks and connections (left to right in the datapath):
//   IFMAP buffer  (axon_buffer, N read ports)  -> im2col muxes
//   im2col muxes  (axon_im2col_feed)           -> row operand of feeder PE (i, i)
//   FILTER buffer (axon_buffer, N read ports)  -> column operand of feeder PE (j, j)
//   array         (axon_array, N x N axon_pe)  -> bottom row -> OUTPUT buffer
//   controller    (axon_ctrl) drives the read addresses, the tags, the im2col
//                 select, capture and the OUTPUT-buffer writes.
// This is the configuration the paper implements (16 x 16, output stationary,
// FP16, im2col support, zero gating). Buffer sizes, the host ports and the
// command format are this design's own.
//
// Host interface: the host fills the IFMAP and FILTER buffers through their
// write ports (16-bit words), issues a tile_cmd_t with cmd_valid/cmd_ready,
// waits for done and reads result rows from the OUTPUT buffer (one entry is
// one array row, N FP16 words, word j in bits 16j+15:16j), one cycle after
// ob_re. The host must not write a buffer the running tile reads.
module axon_top
  import axon_pkg::*;
#(
  parameter int unsigned N         = 16,
  parameter int unsigned IF_DEPTH  = 4096,
  parameter int unsigned FL_DEPTH  = 4096,
  parameter int unsigned OUT_DEPTH = 256,
  localparam int unsigned IF_AW  = $clog2(IF_DEPTH),
  localparam int unsigned FL_AW  = $clog2(FL_DEPTH),
  localparam int unsigned OUT_AW = $clog2(OUT_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // buffer loading
  input  logic              if_we,
  input  logic [IF_AW-1:0]  if_waddr,
  input  fp16_t             if_wdata,
  input  logic              fl_we,
  input  logic [FL_AW-1:0]  fl_waddr,
  input  fp16_t             fl_wdata,
  // result readback
  input  logic              ob_re,
  input  logic [OUT_AW-1:0] ob_raddr,
  output logic [16*N-1:0]   ob_rdata,
  // command
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  tile_cmd_t         cmd,
  output logic              done,
  // statistics
  output logic [31:0]       stat_if_reads,
  output logic [31:0]       stat_fl_reads,
  output logic [31:0]       stat_reused,
  output logic [31:0]       stat_tiles,
  output logic [31:0]       stat_busy,
  output logic [31:0]       stat_macs,
  output logic [31:0]       stat_gated
);

  localparam int unsigned CW = $clog2(N*N+1);

  logic             if_re    [N], fl_re [N];
  logic [IF_AW-1:0] if_raddr [N];
  logic [FL_AW-1:0] fl_raddr [N];
  logic [15:0]      if_rdata [N], fl_rdata [N];
  fp16_t            buf_a [N], feed_a [N], feed_b [N], diag_a_q [N], out_row [N];
  logic             feed_v, feed_f, im2col_sel, out_capture;
  logic             ob_we;
  logic [OUT_AW-1:0] ob_waddr;
  logic [16*N-1:0]  ob_wdata;
  logic [CW-1:0]    mac_count, gated_count;
  logic             ob_re_a    [1];
  logic [OUT_AW-1:0] ob_raddr_a [1];
  logic [16*N-1:0]  ob_rdata_a [1];

  axon_buffer #(.W(16), .DEPTH(IF_DEPTH), .NRD(N)) u_ifmap_buf (
    .clk, .we(if_we), .waddr(if_waddr), .wdata(if_wdata),
    .re(if_re), .raddr(if_raddr), .rdata(if_rdata));

  axon_buffer #(.W(16), .DEPTH(FL_DEPTH), .NRD(N)) u_filter_buf (
    .clk, .we(fl_we), .waddr(fl_waddr), .wdata(fl_wdata),
    .re(fl_re), .raddr(fl_raddr), .rdata(fl_rdata));

  for (genvar i = 0; i < N; i++) begin : g_cast
    assign buf_a[i]            = if_rdata[i];
    assign feed_b[i]           = fl_rdata[i];
    assign ob_wdata[16*i +: 16] = out_row[i];
  end

  axon_im2col_feed #(.ROWS(N)) u_im2col (
    .buf_a, .diag_a_q, .sel(im2col_sel), .feed_a);

  axon_array #(.N(N)) u_array (
    .clk, .rst_n, .feed_a, .feed_b, .feed_v, .feed_f, .diag_a_q,
    .out_capture, .out_row, .mac_count, .gated_count);

  assign ob_re_a[0]    = ob_re;
  assign ob_raddr_a[0] = ob_raddr;
  assign ob_rdata      = ob_rdata_a[0];

  axon_buffer #(.W(16*N), .DEPTH(OUT_DEPTH), .NRD(1)) u_output_buf (
    .clk, .we(ob_we), .waddr(ob_waddr), .wdata(ob_wdata),
    .re(ob_re_a), .raddr(ob_raddr_a), .rdata(ob_rdata_a));

  axon_ctrl #(.N(N), .IF_AW(IF_AW), .FL_AW(FL_AW), .OUT_AW(OUT_AW)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .done,
    .if_re, .if_raddr, .fl_re, .fl_raddr,
    .feed_v, .feed_f, .im2col_sel, .out_capture,
    .ob_we, .ob_waddr, .mac_count, .gated_count,
    .stat_if_reads, .stat_fl_reads, .stat_reused, .stat_tiles,
    .stat_busy, .stat_macs, .stat_gated);

endmodule
