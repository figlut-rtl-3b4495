// tb_fp_pkg -- reference number conversions used by the testbenches.
//
// The functions decode FP16/FP32 bit patterns into `real` with the IEEE
// formulas, independently of the RTL, and draw random FP16 values of a chosen
// exponent range.
package tb_fp_pkg;

  function automatic real fp16_to_real(input logic [15:0] h);
    int  e;
    real m;
    e = int'(h[14:10]);
    m = real'(h[9:0]) / 1024.0;
    if (e == 0) fp16_to_real = m * (2.0 ** -14);
    else        fp16_to_real = (1.0 + m) * (2.0 ** (e - 15));
    if (h[15]) fp16_to_real = -fp16_to_real;
  endfunction

  function automatic real fp32_to_real(input logic [31:0] f);
    int  e;
    real m;
    e = int'(f[30:23]);
    m = real'(f[22:0]) / 8388608.0;
    if (e == 0) fp32_to_real = 0.0;
    else        fp32_to_real = (1.0 + m) * (2.0 ** (e - 127));
    if (f[31]) fp32_to_real = -fp32_to_real;
  endfunction

  // random normal FP16 with biased exponent in [elo, ehi]
  function automatic logic [15:0] rand_fp16(input int elo, input int ehi);
    logic [4:0] e;
    e = 5'(elo + int'($urandom_range(ehi - elo)));
    return {1'($urandom), e, 10'($urandom)};
  endfunction

  function automatic real absr(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

endpackage
