// pe -- FIGLUT processing element: one shared hFFLUT and K read-accumulate units.
//
// The PE registers the LUT it receives from the generator (top row) or from
// the PE above, and forwards that registered table downwards.  Its K RACs all
// read the same table in the same cycle, each with its own stationary key,
// and each adds its value to the partial sum of one output coming from the
// PE on the left.  Keys enter from the left during weight loading and shift
// on to the right.
//
// Timing: a table loaded at edge n is used by the RACs in cycle n+1; their
// partial sums appear on psum_out after edge n+1.  lut_out/lut_en_out lead to
// the PE below, which therefore runs one cycle behind this one.
//
// From the paper: one LUT per PE shared by K = 32 RACs, LUT values propagated
// down the column, partial sums passed along the row, weights from the left.
module pe
  import figlut_pkg::*;
#(
  parameter int K  = K_RAC,
  parameter int LW = LUT_W,
  parameter int PW = PSUM_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // LUT values from the generator or the PE above, and to the PE below
  input  logic                 lut_en_in,
  input  logic signed [LW-1:0] lut_in     [HLUT_N],
  output logic                 lut_en_out,
  output logic signed [LW-1:0] lut_out    [HLUT_N],
  // weight keys, shifted left to right
  input  logic                 key_shift,
  input  logic [MU-1:0]        key_in     [K],
  output logic [MU-1:0]        key_out    [K],
  // partial sums, left to right
  input  logic signed [PW-1:0] psum_in    [K],
  output logic signed [PW-1:0] psum_out   [K]
);

  hfflut #(.W(LW), .N(HLUT_N)) u_lut (
    .clk, .rst_n,
    .en  (lut_en_in),
    .d   (lut_in),
    .q   (lut_out),
    .en_q(lut_en_out)
  );

  for (genvar j = 0; j < K; j++) begin : g_rac
    rac #(.LW(LW), .PW(PW)) u_rac (
      .clk, .rst_n,
      .key_shift,
      .key_in  (key_in[j]),
      .key_out (key_out[j]),
      .lut     (lut_out),
      .psum_in (psum_in[j]),
      .psum_out(psum_out[j])
    );
  end

endmodule
