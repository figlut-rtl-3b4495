// tb_figlut_top -- end-to-end test of the FIGLUT-I accelerator at reduced size (K = 4 RACs per PE, small buffers).
//
// The testbench fills the input, weight, scale and offset buffers through the
// host ports with random FP16 activations, random binary weight planes,
// random FP16 scaling factors alpha and offsets z, starts an operation, waits
// for `done`, reads the output buffer and compares every output with
//   y[m][t] = sum_kt ( sum_i alpha * sum_n (b ? +x : -x) + z * sum_n x )
// evaluated with reals.  The tolerance is derived from the design's number
// format: each activation may lose up to one LSB of the tile's aligned grid
// (2^(emax-29)), and the FP32 steps may lose a few units of 2^-23.
// It also checks the cycle count of each operation and counts how often each
// mechanism happened: weight-tile loads, bit-plane switches, reduction-tile
// and output-tile switches, sign-flipped (negative-half) LUT reads, offset
// additions, partial-sum read-modify-writes, back-to-back streaming and
// different precisions.  A mechanism that never happened counts as a failure.
module tb_figlut_top;
  import figlut_pkg::*;
  import tb_fp_pkg::*;

  localparam int R = 4, C = 8, K = 4, T_MX = 8, KT_MX = 2, MT_MX = 2, Q_MX = 4;
  localparam int LANES = R * K, NIN = C * MU, LAT = C + R, DRAIN = LAT + 4;
  localparam int IAW = $clog2(KT_MX * T_MX), WAW = $clog2(MT_MX * KT_MX * Q_MX * C);
  localparam int SAW = $clog2(MT_MX * KT_MX * Q_MX);
  localparam int ZAW = (MT_MX * KT_MX > 1) ? $clog2(MT_MX * KT_MX) : 1;
  localparam int OAW = $clog2(MT_MX * T_MX);

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [$clog2(Q_MX+1)-1:0]  cfg_q = '0;
  logic [$clog2(KT_MX+1)-1:0] cfg_kt = '0;
  logic [$clog2(MT_MX+1)-1:0] cfg_mt = '0;
  logic [$clog2(T_MX+1)-1:0]  cfg_tok = '0;
  logic busy, done;
  logic ib_we = 0, wb_we = 0, sm_we = 0, zm_we = 0, ob_re = 0;
  logic [IAW-1:0] ib_waddr = '0;
  logic [WAW-1:0] wb_waddr = '0;
  logic [SAW-1:0] sm_waddr = '0;
  logic [ZAW-1:0] zm_waddr = '0;
  logic [OAW-1:0] ob_raddr = '0;
  logic [NIN*16-1:0]   ib_wdata = '0;
  logic [LANES*MU-1:0] wb_wdata = '0;
  logic [LANES*16-1:0] sm_wdata = '0, zm_wdata = '0;
  logic [LANES*32-1:0] ob_rdata;

  always #5 clk = ~clk;

  figlut_top #(.R(R), .C(C), .K(K), .T_MX(T_MX), .KT_MX(KT_MX), .MT_MX(MT_MX), .Q_MX(Q_MX)) dut (
    .clk, .rst_n, .start, .cfg_q, .cfg_kt, .cfg_mt, .cfg_tok, .busy, .done,
    .ib_we, .ib_waddr, .ib_wdata, .wb_we, .wb_waddr, .wb_wdata,
    .sm_we, .sm_waddr, .sm_wdata, .zm_we, .zm_waddr, .zm_wdata,
    .ob_re, .ob_raddr, .ob_rdata);

  // ---- reference data ----
  fp16_t x     [KT_MX*NIN][T_MX];
  bit    b     [Q_MX][MT_MX*LANES][KT_MX*NIN];
  fp16_t alpha [MT_MX][KT_MX][Q_MX][LANES];
  fp16_t zz    [MT_MX][KT_MX][LANES];

  // ---- mechanism counters ----
  int n_load = 0, n_plane_sw = 0, n_kt_sw = 0, n_mt_sw = 0, n_flip = 0, n_off = 0, n_rmw = 0;
  int n_q_modes = 0, run_len = 0, max_run = 0, last_q = -1;
  int cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n) begin
    if (dut.u_ctrl.sm_re) begin
      n_load++;
      if (dut.u_ctrl.plane > 0) n_plane_sw++;
      if (dut.u_ctrl.plane == 0 && dut.u_ctrl.kt > 0) n_kt_sw++;
      if (dut.u_ctrl.plane == 0 && dut.u_ctrl.kt == 0 && dut.u_ctrl.mt > 0) n_mt_sw++;
    end
    if (dut.u_mpu.out_valid && !dut.u_mpu.g_row[0].g_pe[0].u_pe.g_rac[0].u_rac.key[MU-1]) n_flip++;
    if (dut.a_valid && dut.tag_o.add_off) n_off++;
    if (dut.pb_re) n_rmw++;
    if (dut.a_valid) begin run_len++; if (run_len > max_run) max_run = run_len; end
    else run_len = 0;
  end

  initial begin
    #(2000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  task automatic run_op(input int q, input int nkt, input int nmt, input int ntok);
    int start_cyc, ops_cyc;
    // fresh random data
    for (int n = 0; n < nkt * NIN; n++)
      for (int t = 0; t < ntok; t++) begin
        x[n][t] = rand_fp16(9, 19);
        if ($urandom_range(19) == 0) x[n][t] = 16'h0000;
      end
    for (int i = 0; i < q; i++)
      for (int m = 0; m < nmt * LANES; m++)
        for (int n = 0; n < nkt * NIN; n++) b[i][m][n] = 1'($urandom);
    for (int mt = 0; mt < nmt; mt++)
      for (int kt = 0; kt < nkt; kt++)
        for (int l = 0; l < LANES; l++) begin
          zz[mt][kt][l] = rand_fp16(8, 15);
          for (int i = 0; i < q; i++) alpha[mt][kt][i][l] = {1'b0, 15'(rand_fp16(8, 15))};
        end
    // host writes
    for (int kt = 0; kt < nkt; kt++)
      for (int t = 0; t < ntok; t++) begin
        @(negedge clk);
        ib_we = 1; ib_waddr = IAW'(kt * T_MX + t);
        for (int n = 0; n < NIN; n++) ib_wdata[n*16 +: 16] = x[kt*NIN+n][t];
      end
    for (int mt = 0; mt < nmt; mt++)
      for (int kt = 0; kt < nkt; kt++) begin
        for (int i = 0; i < q; i++) begin
          for (int c = 0; c < C; c++) begin
            @(negedge clk);
            ib_we = 0;
            wb_we = 1; wb_waddr = WAW'(((mt * KT_MX + kt) * Q_MX + i) * C + c);
            for (int l = 0; l < LANES; l++)
              for (int mm = 0; mm < MU; mm++)
                wb_wdata[l*MU + MU-1-mm] = b[i][mt*LANES+l][kt*NIN + c*MU + mm];
          end
          @(negedge clk);
          wb_we = 0;
          sm_we = 1; sm_waddr = SAW'((mt * KT_MX + kt) * Q_MX + i);
          for (int l = 0; l < LANES; l++) sm_wdata[l*16 +: 16] = alpha[mt][kt][i][l];
        end
        @(negedge clk);
        sm_we = 0;
        zm_we = 1; zm_waddr = ZAW'(mt * KT_MX + kt);
        for (int l = 0; l < LANES; l++) zm_wdata[l*16 +: 16] = zz[mt][kt][l];
      end
    @(negedge clk);
    ib_we = 0; wb_we = 0; sm_we = 0; zm_we = 0;
    // run
    cfg_q = $bits(cfg_q)'(q); cfg_kt = $bits(cfg_kt)'(nkt);
    cfg_mt = $bits(cfg_mt)'(nmt); cfg_tok = $bits(cfg_tok)'(ntok);
    start = 1;
    start_cyc = cyc;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    ops_cyc = cyc - start_cyc;
    chk(ops_cyc == 1 + nmt * nkt * q * (C + 1 + ntok + DRAIN), "operation cycle count");
    if (q != last_q) begin n_q_modes++; last_q = q; end
    // read and compare
    for (int mt = 0; mt < nmt; mt++)
      for (int t = 0; t < ntok; t++) begin
        @(negedge clk);
        ob_re = 1; ob_raddr = OAW'(mt * T_MX + t);
        @(negedge clk);
        ob_re = 0;
        for (int l = 0; l < LANES; l++) begin
          real want, bound, got;
          int  m;
          m = mt * LANES + l;
          want = 0.0; bound = 0.0;
          for (int kt = 0; kt < nkt; kt++) begin
            real sx, sa, ulp;
            int  emx;
            emx = 1;
            sx = 0.0;
            for (int n = kt * NIN; n < (kt + 1) * NIN; n++) begin
              int e;
              e = (x[n][t][14:10] == 0) ? 1 : int'(x[n][t][14:10]);
              if (e > emx) emx = e;
              sx += fp16_to_real(x[n][t]);
            end
            ulp = 2.0 ** (emx - 29);
            sa = absr(fp16_to_real(zz[mt][kt][l]));
            want += fp16_to_real(zz[mt][kt][l]) * sx;
            bound += absr(fp16_to_real(zz[mt][kt][l]) * sx) * (2.0 ** -20);
            for (int i = 0; i < q; i++) begin
              real bx, a;
              bx = 0.0;
              for (int n = kt * NIN; n < (kt + 1) * NIN; n++)
                bx += b[i][m][n] ? fp16_to_real(x[n][t]) : -fp16_to_real(x[n][t]);
              a = fp16_to_real(alpha[mt][kt][i][l]);
              want += a * bx;
              bound += absr(a * bx) * (2.0 ** -20);
              sa += absr(a);
            end
            bound += sa * real'(NIN) * ulp;
          end
          bound += absr(want) * (2.0 ** -19);
          got = fp32_to_real(ob_rdata[l*32 +: 32]);
          checks++;
          if (absr(got - want) > bound) begin
            failures++;
            if (failures < 15) $display("FAIL q=%0d m=%0d t=%0d got %g want %g (bound %g)", q, m, t, got, want, bound);
          end
        end
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_op(3, 2, 2, 6);
    run_op(1, 1, 1, 8);
    run_op(4, 2, 1, 3);
    run_op(2, 1, 2, 1);
    chk(n_load > 0, "weight tile loads");
    chk(n_plane_sw > 0, "bit-plane switches");
    chk(n_kt_sw > 0, "reduction-tile switches");
    chk(n_mt_sw > 0, "output-tile switches");
    chk(n_flip > 0, "sign-flipped LUT reads");
    chk(n_off > 0, "offset additions");
    chk(n_rmw > 0, "partial-sum read-modify-writes");
    chk(n_q_modes > 1, "precision changes");
    chk(max_run > 1, "back-to-back tokens");
    $display("mechanisms: loads=%0d plane_sw=%0d kt_sw=%0d mt_sw=%0d flips=%0d offsets=%0d rmw=%0d q_modes=%0d max_run=%0d",
             n_load, n_plane_sw, n_kt_sw, n_mt_sw, n_flip, n_off, n_rmw, n_q_modes, max_run);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
