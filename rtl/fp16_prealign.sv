// fp16_prealign -- pre-alignment of one token's FP16 activations (FIGLUT-I).
//
// FIGLUT-I converts the activations that share one reduction tile into
// integers on a common exponent, so that LUT generation and read-accumulate
// are integer additions.  The block finds the largest exponent among the N
// inputs, shifts every significand right by its distance to that exponent and
// applies the sign.  Output value i equals  al[i] * 2^(emax - 15 - 10 - GUARD).
//
// Interface: N FP16 values in, N signed ALIGN_W-bit integers and the shared
// (biased) exponent out.  Purely combinational; the caller registers it.
//
// From the paper: FIGLUT-I pre-aligns activations to the maximum exponent and
// then works on integers.  This design's choices: one shared exponent per token
// per reduction tile (N = COLS*MU = 32), GUARD extra bits below the FP16
// mantissa, truncation of bits shifted further out, subnormals treated with
// exponent 1, Inf/NaN inputs not supported.
module fp16_prealign
  import figlut_pkg::*;
#(
  parameter int N = COLS * MU
) (
  input  fp16_t                      x    [N],
  output logic signed [ALIGN_W-1:0]  al   [N],
  output logic [FP16_EW-1:0]         emax
);

  logic [FP16_EW-1:0] eeff [N];
  logic [FP16_MW:0]   sig  [N];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      eeff[i] = (x[i][14:10] == '0) ? FP16_EW'(1) : x[i][14:10];
      sig[i]  = {(x[i][14:10] != '0), x[i][9:0]};
    end
  end

  always_comb begin
    emax = '0;
    for (int i = 0; i < N; i++)
      if (eeff[i] > emax) emax = eeff[i];
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic [ALIGN_W-2:0] mag;
      logic [FP16_EW-1:0] sh;
      sh  = emax - eeff[i];
      mag = {sig[i], {GUARD{1'b0}}} >> sh;
      al[i] = x[i][15] ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
    end
  end

endmodule
