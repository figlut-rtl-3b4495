// tb_sram_1r1w -- random writes and reads against a reference array: read
// data one cycle after `re`, held while `re` is low, old data on a same-cycle
// read/write of one address.
module tb_sram_1r1w;
  localparam int W = 40, D = 24, AW = 5;
  int checks = 0, failures = 0;
  logic clk = 1'b0, we = 1'b0, re = 1'b0;
  logic [AW-1:0] waddr, raddr;
  logic [W-1:0]  wdata, rdata, model [D], expd;
  logic          written [D];

  always #5 clk = ~clk;

  sram_1r1w #(.W(W), .DEPTH(D), .AW(AW)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic have;
    have = 1'b0;
    for (int a = 0; a < D; a++) written[a] = 1'b0;
    waddr = '0; raddr = '0; wdata = '0;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      if (have) begin
        checks++;
        if (rdata !== expd) begin
          failures++;
          if (failures < 10) $display("FAIL it=%0d got %h want %h", it, rdata, expd);
        end
      end
      we    = 1'($urandom);
      waddr = AW'($urandom_range(D - 1));
      wdata = {8'($urandom), 32'($urandom)};
      re    = 1'($urandom);
      raddr = (it % 7 == 0) ? waddr : AW'($urandom_range(D - 1));
      if (re) begin
        have = written[raddr];
        expd = model[raddr];
      end
      if (we) begin model[waddr] = wdata; written[waddr] = 1'b1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
