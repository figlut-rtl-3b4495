// tb_figlut_ctrl -- checks the tile sequence of the controller on a small
// configuration (q = 3 planes, 2 reduction tiles, 2 output tiles, 5 tokens).
// Expected order, computed here: output tile, then reduction tile, then plane;
// per tile COLS weight reads from the highest column down, key shifts one
// cycle behind them, one scale read, then one token read per cycle with the
// right tags, and `done` after exactly tiles * (COLS+1 + tokens + DRAIN) cycles.
// A second operation at q = 1 checks the runtime precision switch.
module tb_figlut_ctrl;
  localparam int C = 8, TM = 8, KTM = 4, MTM = 2, QM = 4, DR = 5;
  localparam int WAW = $clog2(MTM*KTM*QM*C), SAW = $clog2(MTM*KTM*QM), ZAW = $clog2(MTM*KTM);
  localparam int IAW = $clog2(KTM*TM), OAW = $clog2(MTM*TM), TAW = $clog2(TM);

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [$clog2(QM+1)-1:0]  cfg_q;
  logic [$clog2(KTM+1)-1:0] cfg_kt;
  logic [$clog2(MTM+1)-1:0] cfg_mt;
  logic [$clog2(TM+1)-1:0]  cfg_tok;
  logic busy, done, wb_re, key_shift, sm_re, ib_re, tag_first, tag_add_off, tag_last;
  logic [WAW-1:0] wb_raddr;
  logic [SAW-1:0] sm_raddr;
  logic [ZAW-1:0] zm_raddr;
  logic [IAW-1:0] ib_raddr;
  logic [TAW-1:0] tag_tok;
  logic [OAW-1:0] tag_oaddr;

  always #5 clk = ~clk;

  figlut_ctrl #(.COLS(C), .T_MAX(TM), .KT_MAX(KTM), .MT_MAX(MTM), .Q_MAX(QM), .DRAIN(DR)) dut (
    .clk, .rst_n, .start, .cfg_q, .cfg_kt, .cfg_mt, .cfg_tok, .busy, .done,
    .wb_re, .wb_raddr, .key_shift, .sm_re, .sm_raddr, .zm_raddr, .ib_re, .ib_raddr,
    .tag_tok, .tag_oaddr, .tag_first, .tag_add_off, .tag_last);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic run(input int q, input int nkt, input int nmt, input int ntok);
    int cyc;
    @(negedge clk);
    cfg_q = 3'(q); cfg_kt = 3'(nkt); cfg_mt = 2'(nmt); cfg_tok = 4'(ntok);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    for (int mt = 0; mt < nmt; mt++)
      for (int kt = 0; kt < nkt; kt++)
        for (int p = 0; p < q; p++) begin
          int tile;
          tile = (mt * KTM + kt) * QM + p;
          for (int c = 0; c <= C; c++) begin
            chk(busy && !ib_re && !done, "load state");
            chk(wb_re == (c < C), "wb_re");
            if (c < C) chk(int'(wb_raddr) == tile * C + C - 1 - c, "wb_raddr");
            chk(key_shift == (c > 0), "key_shift");
            chk(sm_re == (c == 0), "sm_re");
            if (c == 0) chk(int'(sm_raddr) == tile && int'(zm_raddr) == mt * KTM + kt, "scale addr");
            @(negedge clk); cyc++;
          end
          for (int t = 0; t < ntok; t++) begin
            chk(ib_re && !wb_re, "stream");
            chk(int'(ib_raddr) == kt * TM + t, "ib_raddr");
            chk(int'(tag_tok) == t && int'(tag_oaddr) == mt * TM + t, "tag tok");
            chk(tag_first == (p == 0 && kt == 0), "tag_first");
            chk(tag_add_off == (p == q - 1), "tag_add_off");
            chk(tag_last == (p == q - 1 && kt == nkt - 1), "tag_last");
            @(negedge clk); cyc++;
          end
          for (int d = 0; d < DR; d++) begin
            chk(busy && !ib_re && !wb_re, "drain");
            @(negedge clk); cyc++;
          end
        end
    chk(done && !busy, "done");
    chk(cyc == 1 + nmt * nkt * q * (C + 1 + ntok + DR), "cycle count");
    @(negedge clk);
    chk(!done, "done pulse");
  endtask

  initial begin
    cfg_q = '0; cfg_kt = '0; cfg_mt = '0; cfg_tok = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    run(3, 2, 2, 5);
    run(1, 1, 1, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
