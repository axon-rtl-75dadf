// axon_pe -- output-stationary processing element of the Axon array.
//
// The PE follows the conventional OS PE: an Input register (operand A, the
// IFMAP/row operand), a Weight register (operand B, the FILTER/column
// operand), a Psum register that accumulates A*B through the FP16 MAC, and an
// Output register fed by a 2-to-1 mux that either captures Psum or takes the
// Output of the PE above, so results drain down the column into the OUTPUT
// buffer. What makes the array "Axon" is only where a_in and b_in come from,
// which the array decides; the PE itself is unchanged from a conventional
// one, as the paper says.
//
// Zero gating (from the paper): when either operand is zero the MAC is
// skipped and Psum keeps its value; `gated` reports it.
//
// Buffer sharing (from the paper's implementation notes): the two PEs on
// either side of a diagonal feeder receive the same operand in the same cycle,
// so one of them can use its partner's register. With OWN_A = 0 (OWN_B = 0)
// the PE has no Input (Weight) register and a_in (b_in) is taken to be the
// partner's registered value.
//
// Two tags travel with operand A (this design's choice; the paper gives no
// control signals): av (operand valid) and af (first element of a new dot
// product, which restarts Psum instead of adding to it). Operand B always
// arrives in the same cycle as A, so it needs no tag.
//
// Timing: operands are registered on the clock edge after they appear at
// a_in/b_in; the MAC works on the registered operands and updates Psum on the
// next edge. out_capture loads Output from Psum; otherwise Output loads
// out_in. Reset (active low, asynchronous) clears every register.
module axon_pe
  import axon_pkg::*;
#(
  parameter bit OWN_A = 1'b1,
  parameter bit OWN_B = 1'b1
) (
  input  logic  clk,
  input  logic  rst_n,
  // operand A (horizontal) with its tags
  input  fp16_t a_in,
  input  logic  av_in,
  input  logic  af_in,
  output fp16_t a_q,
  output logic  av_q,
  output logic  af_q,
  // operand B (vertical)
  input  fp16_t b_in,
  output fp16_t b_q,
  // result readout
  input  logic  out_capture,
  input  fp16_t out_in,
  output fp16_t out_q,
  // activity
  output logic  mac_fire,   // a MAC was performed this cycle
  output logic  gated       // a valid MAC was skipped by zero gating
);

  fp16_t psum_q, mac_y, addend;
  logic  is_zero;

  if (OWN_A) begin : g_a_reg
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) begin
        a_q  <= '0;
        av_q <= 1'b0;
        af_q <= 1'b0;
      end else begin
        a_q  <= a_in;
        av_q <= av_in;
        af_q <= af_in;
      end
  end else begin : g_a_shared
    assign a_q  = a_in;
    assign av_q = av_in;
    assign af_q = af_in;
  end

  if (OWN_B) begin : g_b_reg
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) b_q <= '0;
      else        b_q <= b_in;
  end else begin : g_b_shared
    assign b_q = b_in;
  end

  assign is_zero  = fp16_is_zero(a_q) || fp16_is_zero(b_q);
  assign gated    = av_q && is_zero;
  assign mac_fire = av_q && !is_zero;
  assign addend   = af_q ? fp16_t'(16'h0000) : psum_q;

  fp16_mac u_mac (.a(a_q), .b(b_q), .c(addend), .y(mac_y));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)        psum_q <= '0;
    else if (mac_fire) psum_q <= mac_y;
    else if (gated)    psum_q <= addend;   // MAC skipped; a first element still restarts

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)           out_q <= '0;
    else if (out_capture) out_q <= psum_q;
    else                  out_q <= out_in;

endmodule
