// tb_lut_gen -- checks all eight half-LUT entries against direct signed sums
// x0 + s1 x1 + s2 x2 + s3 x3 (s from the entry index bits, 1 = +), including
// extreme values.
module tb_lut_gen;
  import figlut_pkg::*;

  int checks = 0, failures = 0;
  logic signed [ALIGN_W-1:0] x   [4];
  logic signed [ALIGN_W+1:0] lut [8];

  lut_gen #(.W(ALIGN_W)) dut (.x(x), .lut(lut));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 500; it++) begin
      for (int m = 0; m < 4; m++) begin
        x[m] = ALIGN_W'($urandom);
        if (it < 4) x[m] = (it[0]) ? -(2 ** (ALIGN_W - 1)) : (2 ** (ALIGN_W - 1)) - 1;
      end
      #1;
      for (int j = 0; j < 8; j++) begin
        int want;
        want = int'(x[0]);
        want += j[2] ? int'(x[1]) : -int'(x[1]);
        want += j[1] ? int'(x[2]) : -int'(x[2]);
        want += j[0] ? int'(x[3]) : -int'(x[3]);
        checks++;
        if (int'(lut[j]) != want) begin
          failures++;
          if (failures < 10) $display("FAIL it=%0d j=%0d got %0d want %0d", it, j, lut[j], want);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
