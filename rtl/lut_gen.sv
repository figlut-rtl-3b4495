// lut_gen -- two-step adder tree that builds the half-size LUT for MU = 4.
//
// For activations x0..x3 the half LUT holds the eight sums with +x0:
//   entry j = x0 + (j[2] ? +x1 : -x1) + (j[1] ? +x2 : -x2) + (j[0] ? +x3 : -x3).
// The other eight sums of the full table are these negated, which the RAC's
// decoder supplies.  Step one forms the two upper-pair sums x0+x1, x0-x1 and
// the four lower-pair sums +-x2 +-x3; step two adds one upper and one lower
// pair sum per entry: 2 + 4 + 8 = 14 additions, as the paper counts.
//
// Interface: four signed ALIGN_W-bit aligned activations in, eight signed
// LUT_W-bit entries out.  Combinational; the PE's LUT flip-flops register it.
//
// From the paper: the tree shape, the pair split and the 14-addition count.
// This design's choice: entry order follows the key code (entry 7 = all +).
module lut_gen
  import figlut_pkg::*;
#(
  parameter int W = ALIGN_W
) (
  input  logic signed [W-1:0]      x   [4],
  output logic signed [W+1:0]      lut [8]
);

  logic signed [W+1:0] up [2];   // index = sign bit of x1
  logic signed [W+1:0] lo [4];   // index = {sign of x2, sign of x3}

  logic signed [W+1:0] xe [4];   // sign-extended inputs

  always_comb begin
    for (int m = 0; m < 4; m++) xe[m] = (W+2)'(x[m]);
    up[1] =  xe[0] + xe[1];
    up[0] =  xe[0] - xe[1];
    lo[3] =  xe[2] + xe[3];
    lo[2] =  xe[2] - xe[3];
    lo[1] = -xe[2] + xe[3];
    lo[0] = -xe[2] - xe[3];
    for (int j = 0; j < 8; j++)
      lut[j] = up[j[2]] + lo[j[1:0]];
  end

endmodule
