// axon_im2col_feed -- the im2col multiplexers in front of the diagonal
// feeder PEs.
//
// Each feeder PE (i, i) on the principal diagonal, except the first, has a
// 2-to-1 mux on its row-operand input. With sel = 0 the PE takes the word the
// IFMAP buffer delivers for its row; with sel = 1 it takes the word held in
// the Input register of the feeder PE above it, (i-1, i-1). During a
// stride-1 convolution with an n x n filter, sel is 0 for one cycle and 1 for
// the next n-1, so consecutive convolution windows (one per array row) pass
// the shared IFMAP pixels down the diagonal instead of reading them again.
// This is the paper's mechanism; that row 0 has no mux and always reads the
// buffer follows from it having no feeder PE above.
//
// Interface: buf_a[i] from the IFMAP buffer, diag_a_q[i] the Input register
// of feeder PE i, sel from the controller, feed_a[i] to feeder PE i.
// Purely combinational.
module axon_im2col_feed
  import axon_pkg::*;
#(
  parameter int unsigned ROWS = 16
) (
  input  fp16_t buf_a    [ROWS],
  input  fp16_t diag_a_q [ROWS],
  input  logic  sel,
  output fp16_t feed_a   [ROWS]
);

  assign feed_a[0] = buf_a[0];

  for (genvar i = 1; i < ROWS; i++) begin : g_mux
    assign feed_a[i] = sel ? diag_a_q[i-1] : buf_a[i];
  end

endmodule
