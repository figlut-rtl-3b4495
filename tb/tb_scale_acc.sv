// tb_scale_acc -- checks scaling and FP32 accumulation over bit planes and
// reduction tiles with a real-valued model.  Eight lanes, eight tokens; each
// "plane" streams all tokens with its own alpha; the offset enters on the last
// plane of each tile; the output-buffer writes of the final plane are compared
// with the model, and the partial-sum buffer traffic is checked for
// first-plane initialisation (a buffer pre-filled with garbage must not leak).
module tb_scale_acc;
  import figlut_pkg::*;
  import tb_fp_pkg::*;

  localparam int L = 8, T = 8, TAW = 3, OAW = 4, NQ = 3, NKT = 2;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, first, add_off, last;
  logic signed [PSUM_W-1:0] psum [L];
  logic [FP16_EW-1:0]       e;
  fp16_t alpha [L];
  fp32_t off [L];
  logic [TAW-1:0] tok;
  logic [OAW-1:0] out_addr;
  logic pb_re, pb_we, ob_we;
  logic [TAW-1:0] pb_raddr, pb_waddr;
  logic [OAW-1:0] ob_waddr;
  logic [L*32-1:0] pb_rdata, pb_wdata, ob_wdata;

  real model [T][L], bound [T][L];
  int  n_ob = 0;

  always #5 clk = ~clk;

  scale_acc #(.LANES(L), .TAW(TAW), .OAW(OAW)) dut (
    .clk, .rst_n, .in_valid, .psum, .e, .alpha, .off, .tok, .out_addr, .first, .add_off, .last,
    .pb_re, .pb_raddr, .pb_rdata, .pb_we, .pb_waddr, .pb_wdata, .ob_we, .ob_waddr, .ob_wdata);

  sram_1r1w #(.W(L*32), .DEPTH(T), .AW(TAW)) u_pb (
    .clk, .we(pb_we), .waddr(pb_waddr), .wdata(pb_wdata), .re(pb_re), .raddr(pb_raddr), .rdata(pb_rdata));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && ob_we) begin
    int t;
    t = int'(ob_waddr) - 5;   // out_addr = 5 + tok
    for (int l = 0; l < L; l++) begin
      real got;
      got = fp32_to_real(ob_wdata[l*32 +: 32]);
      checks++;
      if (t < 0 || t >= T || absr(got - model[t][l]) > bound[t][l]) begin
        failures++;
        if (failures < 10) $display("FAIL tok=%0d lane=%0d got %g want %g", t, l, got, model[t][l]);
      end
    end
    n_ob++;
  end

  initial begin
    // garbage in the partial-sum buffer
    for (int t = 0; t < T; t++) u_pb.mem[t] = {L{32'h4b000000}};
    for (int t = 0; t < T; t++) for (int l = 0; l < L; l++) begin model[t][l] = 0.0; bound[t][l] = 0.0; end
    first = 0; add_off = 0; last = 0; tok = '0; out_addr = '0; e = '0;
    for (int l = 0; l < L; l++) begin psum[l] = '0; alpha[l] = '0; off[l] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // two operations: the second must not see the first one's sums
    for (int op = 0; op < 2; op++) begin
    for (int t = 0; t < T; t++) for (int l = 0; l < L; l++) begin model[t][l] = 0.0; bound[t][l] = 0.0; end
    for (int kt = 0; kt < NKT; kt++)
      for (int q = 0; q < NQ; q++) begin
        @(negedge clk);
        in_valid = 1'b0;
        for (int l = 0; l < L; l++) begin
          alpha[l] = rand_fp16(10, 18);
          off[l]   = {1'($urandom), 8'(120 + $urandom_range(10)), 23'($urandom)};
        end
        for (int t = 0; t < T; t++) begin
          in_valid = 1'b1;
          tok = TAW'(t);
          out_addr = OAW'(5 + t);
          first = (q == 0 && kt == 0);
          add_off = (q == NQ - 1);
          last = (q == NQ - 1 && kt == NKT - 1);
          e = FP16_EW'(10 + $urandom_range(10));
          for (int l = 0; l < L; l++) begin
            real term, sc;
            int  ei;
            ei = int'(e) - 29;
            sc = 2.0 ** ei;
            psum[l] = PSUM_W'(int'($urandom_range(2000000)) - 1000000);
            term = fp16_to_real(alpha[l]) * real'(psum[l]) * sc;
            model[t][l] += term;
            bound[t][l] += absr(term) * (2.0 ** -20) + absr(model[t][l]) * (2.0 ** -21);
            if (add_off) begin
              model[t][l] += fp32_to_real(off[l]);
              bound[t][l] += absr(fp32_to_real(off[l])) * (2.0 ** -21) + absr(model[t][l]) * (2.0 ** -21);
            end
          end
          @(negedge clk);
        end
        in_valid = 1'b0;
        repeat (3) @(negedge clk);
      end
    repeat (3) @(negedge clk);
    end
    checks++;
    if (n_ob != 2 * T) begin failures++; $display("FAIL %0d output writes", n_ob); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
