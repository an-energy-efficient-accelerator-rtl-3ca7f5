// sram_1r1w: partial-result SRAM of a convolution unit (one bank of the
// ping-pong pair).
//
// A simple dual-port memory of DEPTH words of WIDTH bits: one synchronous
// write port and one synchronous read port, usable in the same cycle.
// Read data appear on rdata the cycle after re is high and
// hold until the next read.  A read and a write of the same address in the
// same cycle return the old word.  Contents are not reset.
// The published design uses 448 x 32-bit SRAM macros; it does not give the
// macro's port structure.  One read plus one write port per cycle is what
// the serial dataflow needs (a partial result is read back two cycles
// before the new one is written), so that is what is modelled here, as a
// plain array that synthesis maps to a memory.
module sram_1r1w #(
  parameter int unsigned DEPTH = 448,
  parameter int unsigned WIDTH = 32,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

  // Addresses beyond DEPTH are a controller error.
  always_ff @(posedge clk) begin
    if (we) assert (32'(waddr) < DEPTH) else $error("sram_1r1w: write address %0d out of range", waddr);
    if (re) assert (32'(raddr) < DEPTH) else $error("sram_1r1w: read address %0d out of range", raddr);
  end

endmodule
