// fp32_add -- combinational IEEE-754 single-precision adder for the
// accumulator path.
//
// Operands are unpacked, the smaller magnitude is shifted right onto the
// larger exponent (three extra low bits kept), the significands are added or
// subtracted, and the result is renormalised.  The result is truncated
// (rounded toward zero).  Zero and subnormal inputs are treated as zero, a
// result below the normal range flushes to zero, and one above it saturates
// to the largest finite value.  Inf and NaN are not supported.
//
// The paper accumulates in FP32 and builds its FP units from a vendor
// library; this simple adder and its truncating rounding are this design's
// own stand-in.
module fp32_add
  import figlut_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  localparam int SW = FP32_MW + 1 + 3;   // significand with hidden bit and 3 low bits

  always_comb begin
    logic              sa, sb, sy;
    logic [7:0]        ea, eb;
    logic [SW-1:0]     ma, mb;
    logic [SW:0]       s;
    logic [8:0]        d;
    logic signed [10:0] ey;
    int                lz;

    // order operands by magnitude
    if (a[30:0] >= b[30:0]) begin
      sa = a[31]; ea = a[30:23]; ma = (ea == 0) ? '0 : {1'b1, a[22:0], 3'b000};
      sb = b[31]; eb = b[30:23]; mb = (eb == 0) ? '0 : {1'b1, b[22:0], 3'b000};
    end else begin
      sa = b[31]; ea = b[30:23]; ma = (ea == 0) ? '0 : {1'b1, b[22:0], 3'b000};
      sb = a[31]; eb = a[30:23]; mb = (eb == 0) ? '0 : {1'b1, a[22:0], 3'b000};
    end
    if (eb == 0) eb = ea;               // zero operand: no shift needed
    d  = {1'b0, ea} - {1'b0, eb};
    mb = (d >= 9'(SW)) ? '0 : (mb >> d);
    sy = sa;
    ey = 11'(ea);
    lz = 0;

    if (sa == sb) s = {1'b0, ma} + {1'b0, mb};
    else          s = {1'b0, ma} - {1'b0, mb};

    if (ma == 0 || s == 0) begin
      y = '0;
    end else begin
      if (s[SW]) begin
        s  = s >> 1;
        ey = ey + 11'sd1;
      end else begin
        for (int i = 0; i < SW; i++)
          if (s[i]) lz = SW - 1 - i;
        s  = s << lz;
        ey = ey - 11'(lz);
      end
      if (ey <= 0)        y = '0;
      else if (ey >= 255) y = {sy, 8'hFE, 23'h7FFFFF};
      else                y = {sy, ey[7:0], s[SW-2:3]};
    end
  end

endmodule
