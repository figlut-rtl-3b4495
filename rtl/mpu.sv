// mpu -- the LUT-based PE array ("MPU"): LUT generators, ROWS x COLS PEs,
// input skew and output de-skew.
//
// One token (one column of the activation matrix) enters per cycle as
// COLS*MU pre-aligned integers.  Column c takes activations c*MU .. c*MU+MU-1;
// they are delayed by c cycles (the systolic input skew, COLS-1 = 7 stages at
// most), turned into a half LUT by that column's generator and loaded into
// the top PE of the column.  Tables move one row down per cycle.  Partial sums
// start at zero in column 0 and move one column right per cycle, each PE
// adding its RACs' LUT reads.  The last column of row r therefore delivers
// the K partial sums of outputs r*K .. r*K+K-1 r cycles after row 0; row r is
// delayed by ROWS-1-r further cycles so that all ROWS*K sums of one token
// leave together.
//
// Weights are stationary: while `key_shift` is high the keys on key_col enter
// column 0 of every row and the whole key grid shifts one column right, so a
// tile is loaded with COLS shifts (word for column COLS-1 first).  Keys must
// not shift while tokens are in flight.
//
// Timing: out_valid/psum for a token follow its in_valid by LAT = COLS+ROWS
// cycles; one token per cycle.  psum[r*K+j] = sum over the COLS*MU inputs of
// (+-1) * in_al, signs given by the keys of RAC j in row r.
//
// From the paper: array organisation (generators on top, tables propagated
// down, partial sums along rows to the scale unit), K RACs per PE, weight
// stationary dataflow, input skew.  Output de-skew and the shift-chain key
// loading are this design's choices.
module mpu
  import figlut_pkg::*;
#(
  parameter int R = ROWS,
  parameter int C = COLS,
  parameter int K = K_RAC
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic signed [ALIGN_W-1:0] in_al    [C*MU],
  input  logic                      key_shift,
  input  logic [MU-1:0]             key_col  [R*K],
  output logic                      out_valid,
  output logic signed [PSUM_W-1:0]  psum     [R*K]
);

  localparam int LAT = C + R;

  // ---- input skew and LUT generation per column ----
  logic                      gen_en  [C];
  logic signed [LUT_W-1:0]   gen_lut [C][HLUT_N];

  for (genvar c = 0; c < C; c++) begin : g_col
    logic signed [ALIGN_W-1:0] xin [MU];
    if (c == 0) begin : g_noskew
      assign gen_en[c] = in_valid;
      for (genvar m = 0; m < MU; m++) begin : g_m
        assign xin[m] = in_al[m];
      end
    end else begin : g_skew
      logic                      vsk [c];
      logic signed [ALIGN_W-1:0] dsk [c][MU];
      always_ff @(posedge clk) begin
        if (!rst_n) begin
          for (int d = 0; d < c; d++) vsk[d] <= 1'b0;
        end else begin
          vsk[0] <= in_valid;
          for (int d = 1; d < c; d++) vsk[d] <= vsk[d-1];
        end
      end
      always_ff @(posedge clk) begin
        for (int m = 0; m < MU; m++) dsk[0][m] <= in_al[c*MU+m];
        for (int d = 1; d < c; d++) dsk[d] <= dsk[d-1];
      end
      assign gen_en[c] = vsk[c-1];
      assign xin = dsk[c-1];
    end

    lut_gen #(.W(ALIGN_W)) u_gen (.x(xin), .lut(gen_lut[c]));
  end

  // ---- PE grid ----
  logic                     lut_en [R+1][C];
  logic signed [LUT_W-1:0]  lutv   [R+1][C][HLUT_N];
  logic [MU-1:0]            keyv   [R][C+1][K];
  logic signed [PSUM_W-1:0] ps     [R][C+1][K];

  for (genvar c = 0; c < C; c++) begin : g_top
    assign lut_en[0][c] = gen_en[c];
    assign lutv[0][c]   = gen_lut[c];
  end

  for (genvar r = 0; r < R; r++) begin : g_row
    for (genvar j = 0; j < K; j++) begin : g_edge
      assign keyv[r][0][j] = key_col[r*K+j];
      assign ps[r][0][j]   = '0;
    end
    for (genvar c = 0; c < C; c++) begin : g_pe
      pe #(.K(K), .LW(LUT_W), .PW(PSUM_W)) u_pe (
        .clk, .rst_n,
        .lut_en_in (lut_en[r][c]),
        .lut_in    (lutv[r][c]),
        .lut_en_out(lut_en[r+1][c]),
        .lut_out   (lutv[r+1][c]),
        .key_shift,
        .key_in    (keyv[r][c]),
        .key_out   (keyv[r][c+1]),
        .psum_in   (ps[r][c]),
        .psum_out  (ps[r][c+1])
      );
    end

    // ---- output de-skew: row r waits ROWS-1-r cycles ----
    localparam int DS = R - 1 - r;
    if (DS == 0) begin : g_nods
      for (genvar j = 0; j < K; j++) begin : g_o
        assign psum[r*K+j] = ps[r][C][j];
      end
    end else begin : g_ds
      logic signed [PSUM_W-1:0] dq [DS][K];
      always_ff @(posedge clk) begin
        dq[0] <= ps[r][C];
        for (int d = 1; d < DS; d++) dq[d] <= dq[d-1];
      end
      for (genvar j = 0; j < K; j++) begin : g_o
        assign psum[r*K+j] = dq[DS-1][j];
      end
    end
  end

  // ---- valid pipeline matching the array latency ----
  logic [LAT-1:0] vpipe;
  always_ff @(posedge clk) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT-2:0], in_valid};
  end
  assign out_valid = vpipe[LAT-1];

endmodule
