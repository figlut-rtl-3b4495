// offset_unit -- offset term z * sum(x) of extended (uniform) BCQ.
//
// With weights w = sum_i alpha_i b_i + z, every output receives
// z * sum_n x_n on top of the bit-plane sums.  This unit adds the N
// pre-aligned activations of the token that enters the array (an adder tree,
// exact in integers because they share one exponent), delays the sum and
// the exponent by LAT cycles so that they meet the token's partial sums at
// the array output, and there scales the sum by each output's FP16 offset z,
// giving one FP32 offset value per lane.
//
// Interface: in_al/in_e with the token entering the array; z per lane, held
// for the whole tile; off per lane, LAT cycles later.
//
// From the paper: an offset block fed from the input side whose value is
// added to the accumulated sums.  Computing it from the pre-aligned integers
// and the per-lane, per-tile z are this design's choices.
module offset_unit
  import figlut_pkg::*;
#(
  parameter int N     = COLS * MU,
  parameter int LANES = ROWS * K_RAC,
  parameter int LAT   = COLS + ROWS
) (
  input  logic                      clk,
  input  logic signed [ALIGN_W-1:0] in_al [N],
  input  logic [FP16_EW-1:0]        in_e,
  input  fp16_t                     z     [LANES],
  output fp32_t                     off   [LANES]
);

  localparam int SW = ALIGN_W + $clog2(N);

  logic signed [SW-1:0]  sum;
  logic signed [SW-1:0]  sum_d [LAT];
  logic [FP16_EW-1:0]    e_d   [LAT];

  always_comb begin
    sum = '0;
    for (int i = 0; i < N; i++) sum = sum + SW'(in_al[i]);
  end

  always_ff @(posedge clk) begin
    sum_d[0] <= sum;
    e_d[0]   <= in_e;
    for (int d = 1; d < LAT; d++) begin
      sum_d[d] <= sum_d[d-1];
      e_d[d]   <= e_d[d-1];
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    fxp_scale #(.PW(SW)) u_z (.p(sum_d[LAT-1]), .e(e_d[LAT-1]), .f(z[l]), .y(off[l]));
  end

endmodule
