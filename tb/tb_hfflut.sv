// tb_hfflut -- checks reset to zero, loading under enable, holding while the
// enable is low and the one-cycle enable forwarding.
module tb_hfflut;
  import figlut_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, en_q;
  logic signed [LUT_W-1:0] d [HLUT_N];
  logic signed [LUT_W-1:0] q [HLUT_N];
  logic signed [LUT_W-1:0] held [HLUT_N];

  always #5 clk = ~clk;

  hfflut dut (.clk, .rst_n, .en, .d, .q, .en_q);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_q(input logic signed [LUT_W-1:0] exp_v [HLUT_N], input string what);
    for (int i = 0; i < HLUT_N; i++) begin
      checks++;
      if (q[i] !== exp_v[i]) begin
        failures++;
        if (failures < 10) $display("FAIL %s entry %0d got %0d want %0d", what, i, q[i], exp_v[i]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < HLUT_N; i++) d[i] = LUT_W'($urandom);
    repeat (2) @(posedge clk);
    #1;
    for (int i = 0; i < HLUT_N; i++) held[i] = '0;
    check_q(held, "reset");
    rst_n = 1'b1;
    for (int it = 0; it < 200; it++) begin
      en = 1'($urandom);
      for (int i = 0; i < HLUT_N; i++) d[i] = LUT_W'($urandom);
      if (en) held = d;
      @(posedge clk);
      #1;
      check_q(held, en ? "load" : "hold");
      checks++;
      if (en_q !== en) begin
        failures++;
        $display("FAIL en_q");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
