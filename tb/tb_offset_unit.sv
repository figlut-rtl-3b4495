// tb_offset_unit -- checks z * sum(x) per lane.  Tokens of random aligned
// activations and exponents enter every cycle; LAT cycles later each lane's
// FP32 output must match z * sum * 2^(e-29) computed with reals (to within
// the truncation of a 24-bit significand).
module tb_offset_unit;
  import figlut_pkg::*;
  import tb_fp_pkg::*;

  localparam int N = COLS * MU, L = ROWS * K_RAC, LAT = COLS + ROWS, NT = 30;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic signed [ALIGN_W-1:0] in_al [N];
  logic [FP16_EW-1:0]        in_e;
  fp16_t                     z [L];
  fp32_t                     off [L];
  real                       sums [NT];
  int                        es [NT];

  always #5 clk = ~clk;

  offset_unit dut (.clk, .in_al, .in_e, .z, .off);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < L; l++) z[l] = rand_fp16(8, 20);
    z[0] = 16'h0000;   // zero offset gives zero
    for (int t = 0; t < NT + LAT; t++) begin
      @(negedge clk);
      if (t < NT) begin
        int s;
        s = 0;
        for (int n = 0; n < N; n++) begin
          in_al[n] = ALIGN_W'(int'($urandom_range(65534)) - 32767);
          s += int'(in_al[n]);
        end
        in_e = FP16_EW'(1 + $urandom_range(29));
        sums[t] = real'(s);
        es[t]   = int'(in_e);
      end
      if (t >= LAT) begin
        int u;
        u = t - LAT;
        for (int l = 0; l < L; l++) begin
          real want, got;
          want = fp16_to_real(z[l]) * sums[u] * (2.0 ** (es[u] - 29));
          got  = fp32_to_real(off[l]);
          checks++;
          if (absr(got - want) > absr(want) * (2.0 ** -22)) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d lane=%0d got %g want %g", u, l, got, want);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
