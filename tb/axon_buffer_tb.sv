// axon_buffer_tb -- self-checking test of the multi-port scratchpad.
//
// Fills a small buffer through the write port while a shadow array records
// the contents, then issues random reads on all ports at once and checks the
// one-cycle read latency, hold when re is low, and read-before-write on an
// address written in the same cycle.
module axon_buffer_tb;
  localparam int W = 16, DEPTH = 256, NRD = 4, AW = $clog2(DEPTH);

  logic clk = 0;
  always #5 clk = ~clk;

  logic          we;
  logic [AW-1:0] waddr;
  logic [W-1:0]  wdata;
  logic          re    [NRD];
  logic [AW-1:0] raddr [NRD];
  logic [W-1:0]  rdata [NRD];
  logic [W-1:0]  shadow [DEPTH];
  logic [W-1:0]  expv [NRD];
  int checks = 0, failures = 0;

  axon_buffer #(.W(W), .DEPTH(DEPTH), .NRD(NRD)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = '0; wdata = '0;
    foreach (re[p]) begin re[p] = 0; raddr[p] = '0; end
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = W'($urandom); shadow[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      foreach (re[p]) begin
        re[p] = 1; raddr[p] = AW'($urandom); expv[p] = shadow[raddr[p]];
      end
      we = ($urandom_range(1) == 1); waddr = raddr[0]; wdata = W'($urandom);
      @(posedge clk); #1;
      if (we) shadow[waddr] = wdata;
      foreach (re[p]) chk(rdata[p] == expv[p], "read data, one-cycle latency");
      @(negedge clk);
      we = 0;
      foreach (re[p]) begin re[p] = 0; raddr[p] = AW'($urandom); end
      @(posedge clk); #1;
      foreach (re[p]) chk(rdata[p] == expv[p], "read data held while re low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
