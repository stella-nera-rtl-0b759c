// sn_scm: standard-cell memory (register file) used for every table of the
// accelerator: the encoders' threshold and dimension memories and the
// decoders' lookup tables.
//
// DEPTH words of WIDTH bits built from flip-flops, with one synchronous write
// port and one combinational (same-cycle) read port. A write becomes visible
// to the read port in the cycle after it is clocked in. Contents are not
// reset and must be written before they are read.
//
// The paper builds its LUTs from standard cells to run at low voltage; the
// cell type (latch or flip-flop) and the write port are this design's choice.
module sn_scm #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WIDTH = 8,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk_i,
  input  logic             we_i,
  input  logic [AW-1:0]    waddr_i,
  input  logic [WIDTH-1:0] wdata_i,
  input  logic [AW-1:0]    raddr_i,
  output logic [WIDTH-1:0] rdata_o
);

  logic [WIDTH-1:0] mem_q [DEPTH];

  always_ff @(posedge clk_i) begin
    if (we_i && (32'(waddr_i) < DEPTH)) mem_q[waddr_i] <= wdata_i;
  end

  always_comb begin
    rdata_o = '0;
    if (32'(raddr_i) < DEPTH) rdata_o = mem_q[raddr_i];
  end

endmodule
