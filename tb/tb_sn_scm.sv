// tb_sn_scm: self-checking test of the standard-cell memory.
// Writes random words to random addresses while reading random addresses,
// and compares every read with a behavioural copy of the memory. Also checks
// that a write is visible on the read port in the next cycle, not the same.
module tb_sn_scm;
  localparam int unsigned DEPTH = 48;   // not a power of two on purpose
  localparam int unsigned WIDTH = 12;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic             clk = 1'b0;
  logic             we;
  logic [AW-1:0]    waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  int               checks = 0, failures = 0;
  logic [WIDTH-1:0] model [DEPTH];

  always #5 clk = ~clk;

  sn_scm #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (
    .clk_i(clk), .we_i(we), .waddr_i(waddr), .wdata_i(wdata),
    .raddr_i(raddr), .rdata_o(rdata));

  task automatic check(input logic [WIDTH-1:0] got, input logic [WIDTH-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 1'b0; waddr = '0; raddr = '0; wdata = '0;
    // fill every word once
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); wdata = WIDTH'($urandom); model[a] = wdata;
    end
    @(negedge clk); we = 1'b0;
    for (int a = 0; a < DEPTH; a++) begin
      raddr = AW'(a); #1;
      check(rdata, model[a], $sformatf("readback %0d", a));
    end
    // random traffic, read-before-write in the same cycle
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      we    = ($urandom % 2) == 0;
      waddr = AW'($urandom % DEPTH);
      wdata = WIDTH'($urandom);
      raddr = (i % 4 == 0) ? waddr : AW'($urandom % DEPTH);
      #1;
      check(rdata, model[raddr], $sformatf("read %0d", raddr));
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
      check(rdata, model[raddr], $sformatf("read after write %0d", raddr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
