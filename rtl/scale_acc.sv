// scale_acc -- scale & accumulator: turns integer bit-plane sums into FP32 outputs.
//
// For each of LANES outputs and each token it computes
//   acc = (first ? 0 : acc) + alpha * psum + (add_off ? off : 0)
// where psum is the array's integer sum for one bit plane (weight
// 2^(e-29) with 4 guard bits), alpha the FP16 scaling factor of that plane
// and off the FP32 offset term.  acc lives in the partial-sum buffer, one
// word of LANES FP32 values per token, read and written back by this unit.
// When `last` is set the new value is also written to the output buffer.
//
// Pipeline: cycle 0 (in_valid) -- scale psum by alpha, issue the buffer read
// of word `tok`; cycle 1 -- add, write back to the partial-sum buffer and,
// for the last plane of the last tile, to the output buffer at out_addr.
// A word must not come back within one cycle of its previous update (tokens
// of a tile are distinct, and tiles are separated by the array drain).
//
// From the paper: the final row sum is multiplied by alpha_i and accumulated
// in the accumulator buffer, and after all planes the offset is added before
// the output buffer.  FP32 accumulation follows the paper; the FP16 alpha,
// truncating arithmetic and the two-stage read-modify-write are choices here.
module scale_acc
  import figlut_pkg::*;
#(
  parameter int LANES = ROWS * K_RAC,
  parameter int TAW   = 7,
  parameter int OAW   = 10
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [PSUM_W-1:0] psum     [LANES],
  input  logic [FP16_EW-1:0]       e,
  input  fp16_t                    alpha    [LANES],
  input  fp32_t                    off      [LANES],
  input  logic [TAW-1:0]           tok,
  input  logic [OAW-1:0]           out_addr,
  input  logic                     first,
  input  logic                     add_off,
  input  logic                     last,
  // partial-sum (accumulator) buffer
  output logic                     pb_re,
  output logic [TAW-1:0]           pb_raddr,
  input  logic [LANES*32-1:0]      pb_rdata,
  output logic                     pb_we,
  output logic [TAW-1:0]           pb_waddr,
  output logic [LANES*32-1:0]      pb_wdata,
  // output buffer
  output logic                     ob_we,
  output logic [OAW-1:0]           ob_waddr,
  output logic [LANES*32-1:0]      ob_wdata
);

  fp32_t          prod   [LANES];
  fp32_t          prod_q [LANES];
  fp32_t          offv_q [LANES];
  logic           v_q, first_q, last_q;
  logic [TAW-1:0] tok_q;
  logic [OAW-1:0] oaddr_q;

  assign pb_re    = in_valid && !first;
  assign pb_raddr = tok;

  for (genvar l = 0; l < LANES; l++) begin : g_scale
    fxp_scale #(.PW(PSUM_W)) u_mul (.p(psum[l]), .e(e), .f(alpha[l]), .y(prod[l]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v_q <= 1'b0;
    end else begin
      v_q <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    prod_q  <= prod;
    for (int l = 0; l < LANES; l++) offv_q[l] <= add_off ? off[l] : '0;
    first_q <= first;
    last_q  <= last;
    tok_q   <= tok;
    oaddr_q <= out_addr;
  end

  // stage 1: accumulate
  fp32_t acc_old [LANES];
  fp32_t s1      [LANES];
  fp32_t s2      [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_acc
    assign acc_old[l] = first_q ? '0 : pb_rdata[l*32 +: 32];
    fp32_add u_a1 (.a(acc_old[l]), .b(prod_q[l]), .y(s1[l]));
    fp32_add u_a2 (.a(s1[l]),      .b(offv_q[l]), .y(s2[l]));
    assign pb_wdata[l*32 +: 32] = s2[l];
    assign ob_wdata[l*32 +: 32] = s2[l];
  end

  assign pb_we    = v_q;
  assign pb_waddr = tok_q;
  assign ob_we    = v_q && last_q;
  assign ob_waddr = oaddr_q;

endmodule
