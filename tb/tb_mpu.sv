// tb_mpu -- checks the full 4 x 8 x 32 PE array.  Random keys are shifted in
// (8 words, last column first), then tokens of 32 random aligned activations
// stream in, one per cycle, with a gap.  Each output lane must equal the
// signed sum over the 32 activations with signs from its keys, and must
// appear exactly LAT = COLS+ROWS cycles after its token (one token per cycle).
module tb_mpu;
  import figlut_pkg::*;

  localparam int R = ROWS, C = COLS, K = K_RAC, L = R * K, N = C * MU, LAT = C + R;
  localparam int NT = 40;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, key_shift = 1'b0, out_valid;
  logic signed [ALIGN_W-1:0] in_al [N];
  logic [MU-1:0]             key_col [L];
  logic signed [PSUM_W-1:0]  psum [L];

  logic [MU-1:0] keyg [R][C][K];
  int            xs [NT][N];
  int            issue_cyc [NT];
  int            cyc = 0, n_in = 0, n_out = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  mpu dut (.clk, .rst_n, .in_valid, .in_al, .key_shift, .key_col, .out_valid, .psum);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_out(input int t, input int r, input int j);
    int v = 0;
    for (int c = 0; c < C; c++)
      for (int m = 0; m < MU; m++)
        v += keyg[r][c][j][MU-1-m] ? xs[t][c*MU+m] : -xs[t][c*MU+m];
    return v;
  endfunction

  // output monitor
  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (n_out >= n_in || cyc - issue_cyc[n_out] != LAT) begin
      failures++;
      $display("FAIL token %0d latency %0d", n_out, cyc - issue_cyc[n_out]);
    end
    for (int r = 0; r < R; r++)
      for (int j = 0; j < K; j++) begin
        checks++;
        if (int'(psum[r*K+j]) != ref_out(n_out, r, j)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d r=%0d j=%0d got %0d want %0d", n_out, r, j, psum[r*K+j], ref_out(n_out, r, j));
        end
      end
    n_out++;
  end

  initial begin
    for (int n = 0; n < N; n++) in_al[n] = '0;
    for (int l = 0; l < L; l++) key_col[l] = '0;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) for (int j = 0; j < K; j++)
      keyg[r][c][j] = MU'($urandom);
    for (int t = 0; t < NT; t++) for (int n = 0; n < N; n++)
      xs[t][n] = int'($urandom_range(65534)) - 32767;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // load keys: column C-1 first
    for (int c = C - 1; c >= 0; c--) begin
      @(negedge clk);
      key_shift = 1'b1;
      for (int r = 0; r < R; r++) for (int j = 0; j < K; j++) key_col[r*K+j] = keyg[r][c][j];
    end
    @(negedge clk);
    key_shift = 1'b0;
    for (int l = 0; l < L; l++) key_col[l] = MU'($urandom);   // must not matter
    for (int t = 0; t < NT; t++) begin
      if (t == NT / 2) begin
        in_valid = 1'b0;
        repeat (3) @(negedge clk);
      end
      in_valid = 1'b1;
      for (int n = 0; n < N; n++) in_al[n] = ALIGN_W'(xs[t][n]);
      issue_cyc[t] = cyc;
      n_in++;
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (LAT + 4) @(negedge clk);
    checks++;
    if (n_out != NT) begin failures++; $display("FAIL got %0d outputs", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
