// fxp_scale -- scales a pre-aligned integer sum by an FP16 factor and returns FP32.
//
// The PE array returns integer partial sums whose weight is
// 2^(e - 15 - 10 - GUARD), e being the shared FP16 exponent of the token.
// This unit multiplies the integer magnitude by the factor's 11-bit
// significand, locates the leading one and packs sign, exponent
// (lead + e + e_factor - 50 - GUARD + 127) and the 23 bits below the leading
// one (truncated) into FP32.  Used for the scaling factor alpha_i and for the
// offset z.  With the widths of this design the result is always in the
// normal FP32 range, so no overflow handling is needed.
//
// Combinational.  A subnormal FP16 factor is taken with exponent 1.  The top
// bit of `norm` (the leading one) and the upper bits of `ey` are left unused
// on purpose: the hidden bit is not stored and the exponent cannot leave the
// 8-bit range.
module fxp_scale
  import figlut_pkg::*;
#(
  parameter int PW = PSUM_W
) (
  input  logic signed [PW-1:0]   p,
  input  logic [FP16_EW-1:0]     e,
  input  fp16_t                  f,
  output fp32_t                  y
);

  localparam int XW = PW + FP16_MW + 1;   // product width

  always_comb begin
    logic [PW-1:0]      mag;
    logic [FP16_MW:0]   fm;
    logic [FP16_EW-1:0] fe;
    logic [XW-1:0]      prod, norm;
    logic signed [10:0] ey;
    int                 lead;

    mag  = p[PW-1] ? PW'(-p) : PW'(p);
    fe   = (f[14:10] == 0) ? FP16_EW'(1) : f[14:10];
    fm   = {(f[14:10] != 0), f[9:0]};
    prod = XW'(mag) * XW'(fm);
    lead = 0;
    for (int i = 0; i < XW; i++)
      if (prod[i]) lead = i;
    norm = prod << (XW - 1 - lead);
    ey   = 11'(lead) + 11'(e) + 11'(fe) - 11'(2 * (FP16_BIAS + FP16_MW) + GUARD)
           + 11'(FP32_BIAS);
    if (prod == 0)
      y = '0;
    else if (XW - 1 >= FP32_MW)
      y = {p[PW-1] ^ f[15], ey[7:0], norm[XW-2 -: FP32_MW]};
    else
      y = {p[PW-1] ^ f[15], ey[7:0], FP32_MW'({norm[XW-2:0]} << (FP32_MW - XW + 1))};
  end

endmodule
