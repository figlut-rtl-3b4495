// sram_1r1w -- on-chip buffer: one synchronous write port, one synchronous read port.
//
// Behaves like a two-port SRAM macro: a write with `we` stores wdata at
// waddr on the clock edge; a read with `re` returns mem[raddr] on rdata after
// the edge and rdata then holds until the next read.  A read and a write of
// the same address in the same cycle return the old word.  The array is not
// reset, as an SRAM is not.
//
// Used for the input, weight, scale, offset, partial-sum and output buffers.
// The paper builds its buffers from 28 nm SRAM; this array description is
// this design's portable stand-in and leaves macro mapping to synthesis.
module sram_1r1w #(
  parameter int W     = 32,
  parameter int DEPTH = 256,
  parameter int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
