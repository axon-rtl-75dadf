// axon_buffer -- on-chip scratchpad used for the IFMAP, FILTER and OUTPUT
// buffers of the Axon accelerator.
//
// The paper draws these buffers beside the array (IFMAP on the left, FILTER
// on top, OUTPUT below) but gives neither their size nor their organisation.
// This design models each as one memory array with a single write port and
// NRD independent read ports, so that the IFMAP buffer can deliver one word
// to each of the N diagonal feeder PEs per cycle and the FILTER buffer one
// word to each column; the OUTPUT buffer is instantiated with a row-wide
// word (all N results of one array row) and one read port. A real chip would
// build this from SRAM macros, banked; that mapping is left open here.
//
// Timing: a write (we, waddr, wdata) takes effect at the clock edge; a read
// on port p with re[p] set returns mem[raddr[p]] on rdata[p] after the next
// edge and holds it while re[p] is low. A read and a write of the same
// address in one cycle return the old word. No reset of the contents.
module axon_buffer #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned NRD   = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic           clk,
  input  logic           we,
  input  logic [AW-1:0]  waddr,
  input  logic [W-1:0]   wdata,
  input  logic           re    [NRD],
  input  logic [AW-1:0]  raddr [NRD],
  output logic [W-1:0]   rdata [NRD]
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  for (genvar p = 0; p < NRD; p++) begin : g_rd
    always_ff @(posedge clk)
      if (re[p]) rdata[p] <= mem[raddr[p]];
  end

endmodule
