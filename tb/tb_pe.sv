// tb_pe -- checks one PE with its default 32 RACs: LUT loading and forwarding
// down, key shifting, and for every RAC psum_out = psum_in + the table value
// selected by its key, computed here from the activations directly.
module tb_pe;
  import figlut_pkg::*;

  localparam int K = K_RAC;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic lut_en_in = 1'b0, lut_en_out, key_shift = 1'b0;
  logic signed [LUT_W-1:0]  lut_in [HLUT_N], lut_out [HLUT_N];
  logic [MU-1:0]            key_in [K], key_out [K], keys [K];
  logic signed [PSUM_W-1:0] psum_in [K], psum_out [K];
  int x [MU];

  always #5 clk = ~clk;

  pe dut (.clk, .rst_n, .lut_en_in, .lut_in, .lut_en_out, .lut_out,
          .key_shift, .key_in, .key_out, .psum_in, .psum_out);

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_val(input logic [MU-1:0] key);
    int v = 0;
    for (int m = 0; m < MU; m++) v += key[MU-1-m] ? x[m] : -x[m];
    return v;
  endfunction

  initial begin
    for (int j = 0; j < K; j++) begin psum_in[j] = '0; key_in[j] = '0; end
    for (int i = 0; i < HLUT_N; i++) lut_in[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 100; it++) begin
      int want [K];
      @(negedge clk);
      // new keys every few rounds
      if (it % 10 == 0) begin
        for (int j = 0; j < K; j++) begin keys[j] = MU'($urandom); key_in[j] = keys[j]; end
        key_shift = 1'b1;
      end
      for (int m = 0; m < MU; m++) x[m] = int'($urandom_range(65534)) - 32767;
      for (int j = 0; j < HLUT_N; j++)
        lut_in[j] = LUT_W'(x[0] + (j[2] ? x[1] : -x[1]) + (j[1] ? x[2] : -x[2]) + (j[0] ? x[3] : -x[3]));
      lut_en_in = 1'b1;
      @(negedge clk);
      key_shift = 1'b0;
      lut_en_in = 1'b0;
      for (int j = 0; j < HLUT_N; j++) lut_in[j] = LUT_W'($urandom);   // must be ignored
      checks++;
      if (lut_en_out !== 1'b1) begin failures++; $display("FAIL lut_en_out"); end
      for (int j = 0; j < K; j++) begin
        psum_in[j] = PSUM_W'(int'($urandom_range(400000)) - 200000);
        want[j] = int'(psum_in[j]) + ref_val(keys[j]);
        checks++;
        if (key_out[j] !== keys[j]) begin failures++; $display("FAIL key_out %0d", j); end
      end
      @(negedge clk);
      for (int j = 0; j < K; j++) begin
        checks++;
        if (int'(psum_out[j]) != want[j]) begin
          failures++;
          if (failures < 10) $display("FAIL it=%0d rac=%0d got %0d want %0d", it, j, psum_out[j], want[j]);
        end
      end
      checks++;
      if (lut_en_out !== 1'b0) begin failures++; $display("FAIL lut_en_out low"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
