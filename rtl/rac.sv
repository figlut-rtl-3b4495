// rac -- read-accumulate unit: the LUT-based replacement of a MAC.
//
// The RAC holds a MU-bit weight key (one bit per binary weight, 1 = +1).  Each
// cycle it decodes the key against the shared half-size LUT: the key MSB picks
// either the lower key bits or their complement as the entry index, and the
// entry is negated when the MSB is 0 (the missing half of the table is the
// mirror image of the stored half).  The decoded value is added to the partial
// sum arriving from the left and registered towards the right.
//
// Keys are loaded by shifting: while `key_shift` is high, key_in is captured
// and the previous key moves out on key_out to the next column.  They stay
// fixed while activations stream (weight stationary).
//
// Interface: lut entries, psum_in from the left, psum_out (registered, one
// cycle) to the right.
//
// From the paper: the key register, the MSB-controlled index mux and sign
// flip, and accumulation into the passing partial sum.  This design's choice:
// two's-complement integers, shift-chain key loading, synchronous reset.
module rac
  import figlut_pkg::*;
#(
  parameter int LW = LUT_W,
  parameter int PW = PSUM_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 key_shift,
  input  logic [MU-1:0]        key_in,
  output logic [MU-1:0]        key_out,
  input  logic signed [LW-1:0] lut      [HLUT_N],
  input  logic signed [PW-1:0] psum_in,
  output logic signed [PW-1:0] psum_out
);

  logic [MU-1:0]        key;
  logic signed [LW-1:0] entry;
  logic signed [PW-1:0] val;

  assign key_out = key;

  always_comb begin
    entry = lut[hlut_index(key)];
    val   = hlut_negate(key) ? -PW'(entry) : PW'(entry);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      key      <= '0;
      psum_out <= '0;
    end else begin
      if (key_shift) key <= key_in;
      psum_out <= psum_in + val;
    end
  end

endmodule
