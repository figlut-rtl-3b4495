// hfflut -- flip-flop based half-size look-up table (hFFLUT).
//
// A bank of N = 2^(MU-1) registers written all at once from the LUT generator
// (or from the PE above) when `en` is high, and held otherwise.  Every entry
// is a plain flip-flop output, so any number of RACs can read any entries in
// the same cycle: there are no read ports and hence no bank conflicts.  The
// registered enable is passed on with the data so that the PE below loads the
// same table one cycle later.
//
// Interface: en/d in, q (all entries) and en_q out.  One cycle from d to q.
// Reset clears the table.
//
// From the paper: flip-flop storage, shared by many readers, written on the
// fly under an enable, half size through sign symmetry.  This design's
// choice: synchronous active-low reset to zero.
module hfflut
  import figlut_pkg::*;
#(
  parameter int W = LUT_W,
  parameter int N = HLUT_N
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic signed [W-1:0] d    [N],
  output logic signed [W-1:0] q    [N],
  output logic                en_q
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) q[i] <= '0;
      en_q <= 1'b0;
    end else begin
      en_q <= en;
      if (en)
        for (int i = 0; i < N; i++) q[i] <= d[i];
    end
  end

endmodule
