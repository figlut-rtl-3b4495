// tb_fp16_prealign -- checks pre-alignment against real-valued decoding.
// For random token vectors (mixed exponent spreads, zeros and subnormals) it
// checks that emax is the largest effective exponent and that every aligned
// integer times 2^(emax-29) is within one LSB below |x| (truncation).
module tb_fp16_prealign;
  import figlut_pkg::*;
  import tb_fp_pkg::*;

  localparam int N = 32;
  int checks = 0, failures = 0;

  fp16_t                     x  [N];
  logic signed [ALIGN_W-1:0] al [N];
  logic [FP16_EW-1:0]        emax;

  fp16_prealign #(.N(N)) dut (.x(x), .al(al), .emax(emax));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 300; it++) begin
      int emx, lo, hi;
      lo = 1 + int'($urandom_range(20));
      hi = lo + int'($urandom_range(29 - lo));
      emx = 0;
      for (int i = 0; i < N; i++) begin
        int e;
        x[i] = rand_fp16(lo, hi);
        if ($urandom_range(15) == 0) x[i] = 16'h0000;
        if ($urandom_range(31) == 0) x[i] = {1'($urandom), 5'd0, 10'($urandom)};
        e = (x[i][14:10] == 0) ? 1 : int'(x[i][14:10]);
        if (e > emx) emx = e;
      end
      #1;
      checks++;
      if (int'(emax) != emx) begin
        failures++;
        $display("FAIL it=%0d emax=%0d expected %0d", it, emax, emx);
      end
      for (int i = 0; i < N; i++) begin
        real ulp, got, want;
        ulp  = 2.0 ** (emx - 29);
        got  = real'(al[i]) * ulp;
        want = fp16_to_real(x[i]);
        checks++;
        if (absr(got) > absr(want) || absr(want) - absr(got) >= ulp ||
            (want < 0.0 && got > 0.0) || (want > 0.0 && got < 0.0)) begin
          failures++;
          if (failures < 10) $display("FAIL it=%0d i=%0d x=%h got %g want %g", it, i, x[i], got, want);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
