// tb_rac -- checks the read-accumulate unit.  A half LUT is built in the
// testbench from random x0..x3; for every key the RAC must add the full-table
// value sum_m (key bit ? +x_m : -x_m) to psum_in, one cycle later.  Key
// loading and key forwarding are checked as well.
module tb_rac;
  import figlut_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, key_shift = 1'b0;
  logic [MU-1:0] key_in, key_out;
  logic signed [LUT_W-1:0]  lut [HLUT_N];
  logic signed [PSUM_W-1:0] psum_in, psum_out;
  int x [MU];

  always #5 clk = ~clk;

  rac dut (.clk, .rst_n, .key_shift, .key_in, .key_out, .lut, .psum_in, .psum_out);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    psum_in = '0;
    key_in  = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 64; it++) begin
      for (int m = 0; m < MU; m++) x[m] = int'($urandom_range(65535)) - 32768;
      for (int j = 0; j < HLUT_N; j++)
        lut[j] = LUT_W'(x[0] + (j[2] ? x[1] : -x[1]) + (j[1] ? x[2] : -x[2]) + (j[0] ? x[3] : -x[3]));
      for (int k = 0; k < 16; k++) begin
        int want;
        // load key k
        @(negedge clk);
        key_in = MU'(k);
        key_shift = 1'b1;
        @(negedge clk);
        key_shift = 1'b0;
        checks++;
        if (key_out !== MU'(k)) begin failures++; $display("FAIL key_out"); end
        psum_in = PSUM_W'(int'($urandom_range(200000)) - 100000);
        want = int'(psum_in);
        for (int m = 0; m < MU; m++) want += k[MU-1-m] ? x[m] : -x[m];
        @(negedge clk);
        checks++;
        if (int'(psum_out) != want) begin
          failures++;
          if (failures < 10) $display("FAIL key=%b got %0d want %0d", 4'(k), psum_out, want);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
