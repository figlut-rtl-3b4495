// figlut_top -- FIGLUT-I accelerator: LUT-based FP16 x BCQ-weight GEMM.
//
// Computes, for every output row m and token t,
//   y[m][t] = sum_kt ( sum_i alpha[m,kt,i] * sum_n b_i[m][n] x[n][t]  +  z[m,kt] * sum_n x[n][t] )
// with b in {-1,+1}, i over q bit planes and n over the kt-th reduction tile of
// COLS*MU = 32 activations.  Uniform INT-q weights fit the same form by
// choosing alpha_i = s*2^(i-2) and z = s*((2^q-1)/2 - zero_point).
//
// Datapath: input buffer -> FP16 pre-alignment (shared exponent per token and
// tile) -> MPU (LUT generators and a ROWS x COLS grid of PEs with K RACs each)
// -> scale & accumulator (FP32, partial sums kept in the psum buffer) ->
// output buffer.  The offset unit adds z * sum(x).  The controller loads each
// weight tile plane by plane and streams the tokens through it.
//
// Host interface: write ports of the input, weight, scale (alpha) and offset
// (z) buffers; `start` with the operation size (q planes, n_kt reduction
// tiles, n_mt output tiles, n_tok tokens); `done` pulses at the end; the
// output buffer is then read through its read port (one word = ROWS*K FP32
// outputs of one token, read data one cycle after ob_re).
//
// Buffer maps (word = one row of the table below):
//   input   addr kt*T_MAX + t                  : COLS*MU FP16, lane n = input kt*32+n
//   weight  addr ((mt*KT_MAX+kt)*Q_MAX+i)*COLS+c : ROWS*K keys of MU bits, key of
//           output mt*128 + r*K + j at bits (r*K+j)*MU, key MSB = input c*MU
//   scale   addr (mt*KT_MAX+kt)*Q_MAX+i         : ROWS*K FP16 alpha
//   offset  addr mt*KT_MAX+kt                   : ROWS*K FP16 z
//   output  addr mt*T_MAX + t                   : ROWS*K FP32
//
// Timing: per tile and plane (COLS+1) load + n_tok stream + DRAIN cycles;
// one token per cycle while streaming.
//
// From the paper: the architecture (buffers, LUT generators, PE array with
// shared FFLUTs and RACs, offset, scale & accumulator, psum buffer), mu = 4,
// k = 32, the 8 x 4 array, FP16 inputs, FP32 accumulation, the fetch order.
// Buffer sizes, address maps, the host interface and the drain between
// tiles are this design's choices.
module figlut_top
  import figlut_pkg::*;
#(
  parameter int R      = ROWS,
  parameter int C      = COLS,
  parameter int K      = K_RAC,
  parameter int T_MX   = T_MAX,
  parameter int KT_MX  = KT_MAX,
  parameter int MT_MX  = MT_MAX,
  parameter int Q_MX   = Q_MAX,
  localparam int LANES = R * K,
  localparam int NIN   = C * MU,
  localparam int LAT   = C + R,
  localparam int PIPE  = 2 + LAT,
  localparam int DRAIN = PIPE + 2,
  localparam int TAW   = (T_MX > 1) ? $clog2(T_MX) : 1,
  localparam int IAW   = $clog2(KT_MX * T_MX),
  localparam int WAW   = $clog2(MT_MX * KT_MX * Q_MX * C),
  localparam int SAW   = $clog2(MT_MX * KT_MX * Q_MX),
  localparam int ZAW   = (MT_MX * KT_MX > 1) ? $clog2(MT_MX * KT_MX) : 1,
  localparam int OAW   = $clog2(MT_MX * T_MX)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // control
  input  logic                        start,
  input  logic [$clog2(Q_MX+1)-1:0]   cfg_q,
  input  logic [$clog2(KT_MX+1)-1:0]  cfg_kt,
  input  logic [$clog2(MT_MX+1)-1:0]  cfg_mt,
  input  logic [$clog2(T_MX+1)-1:0]   cfg_tok,
  output logic                        busy,
  output logic                        done,
  // buffer write ports
  input  logic                        ib_we,
  input  logic [IAW-1:0]              ib_waddr,
  input  logic [NIN*16-1:0]           ib_wdata,
  input  logic                        wb_we,
  input  logic [WAW-1:0]              wb_waddr,
  input  logic [LANES*MU-1:0]         wb_wdata,
  input  logic                        sm_we,
  input  logic [SAW-1:0]              sm_waddr,
  input  logic [LANES*16-1:0]         sm_wdata,
  input  logic                        zm_we,
  input  logic [ZAW-1:0]              zm_waddr,
  input  logic [LANES*16-1:0]         zm_wdata,
  // output buffer read port
  input  logic                        ob_re,
  input  logic [OAW-1:0]              ob_raddr,
  output logic [LANES*32-1:0]         ob_rdata
);

  typedef struct packed {
    logic           valid;
    logic [TAW-1:0] tok;
    logic [OAW-1:0] oaddr;
    logic           first;
    logic           add_off;
    logic           last;
  } tag_t;

  // ---------------- controller ----------------
  logic           c_wb_re, c_key_shift, c_sm_re, c_ib_re;
  logic [WAW-1:0] c_wb_raddr;
  logic [SAW-1:0] c_sm_raddr;
  logic [ZAW-1:0] c_zm_raddr;
  logic [IAW-1:0] c_ib_raddr;
  tag_t           tag0;

  figlut_ctrl #(
    .COLS(C), .T_MAX(T_MX), .KT_MAX(KT_MX), .MT_MAX(MT_MX), .Q_MAX(Q_MX), .DRAIN(DRAIN),
    .TAW(TAW), .IAW(IAW), .WAW(WAW), .SAW(SAW), .ZAW(ZAW), .OAW(OAW)
  ) u_ctrl (
    .clk, .rst_n, .start, .cfg_q, .cfg_kt, .cfg_mt, .cfg_tok, .busy, .done,
    .wb_re(c_wb_re), .wb_raddr(c_wb_raddr), .key_shift(c_key_shift),
    .sm_re(c_sm_re), .sm_raddr(c_sm_raddr), .zm_raddr(c_zm_raddr),
    .ib_re(c_ib_re), .ib_raddr(c_ib_raddr),
    .tag_tok(tag0.tok), .tag_oaddr(tag0.oaddr), .tag_first(tag0.first),
    .tag_add_off(tag0.add_off), .tag_last(tag0.last)
  );
  assign tag0.valid = c_ib_re;

  // ---------------- buffers ----------------
  logic [NIN*16-1:0]   ib_rdata;
  logic [LANES*MU-1:0] wb_rdata;
  logic [LANES*16-1:0] sm_rdata, zm_rdata;

  sram_1r1w #(.W(NIN*16), .DEPTH(KT_MX*T_MX), .AW(IAW)) u_ibuf (
    .clk, .we(ib_we), .waddr(ib_waddr), .wdata(ib_wdata),
    .re(c_ib_re), .raddr(c_ib_raddr), .rdata(ib_rdata));

  sram_1r1w #(.W(LANES*MU), .DEPTH(MT_MX*KT_MX*Q_MX*C), .AW(WAW)) u_wbuf (
    .clk, .we(wb_we), .waddr(wb_waddr), .wdata(wb_wdata),
    .re(c_wb_re), .raddr(c_wb_raddr), .rdata(wb_rdata));

  sram_1r1w #(.W(LANES*16), .DEPTH(MT_MX*KT_MX*Q_MX), .AW(SAW)) u_sbuf (
    .clk, .we(sm_we), .waddr(sm_waddr), .wdata(sm_wdata),
    .re(c_sm_re), .raddr(c_sm_raddr), .rdata(sm_rdata));

  sram_1r1w #(.W(LANES*16), .DEPTH(MT_MX*KT_MX), .AW(ZAW)) u_zbuf (
    .clk, .we(zm_we), .waddr(zm_waddr), .wdata(zm_wdata),
    .re(c_sm_re), .raddr(c_zm_raddr), .rdata(zm_rdata));

  // ---------------- pre-alignment (one register stage) ----------------
  fp16_t                     x_in  [NIN];
  logic signed [ALIGN_W-1:0] al    [NIN];
  logic [FP16_EW-1:0]        emax;
  logic signed [ALIGN_W-1:0] al_q  [NIN];
  logic [FP16_EW-1:0]        emax_q;
  logic                      ib_v_q, pa_v_q;

  for (genvar n = 0; n < NIN; n++) begin : g_x
    assign x_in[n] = ib_rdata[n*16 +: 16];
  end

  fp16_prealign #(.N(NIN)) u_align (.x(x_in), .al(al), .emax(emax));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ib_v_q <= 1'b0;
      pa_v_q <= 1'b0;
    end else begin
      ib_v_q <= c_ib_re;
      pa_v_q <= ib_v_q;
    end
  end

  always_ff @(posedge clk) begin
    if (ib_v_q) begin
      al_q   <= al;
      emax_q <= emax;
    end
  end

  // ---------------- PE array ----------------
  logic [MU-1:0]            keys [LANES];
  logic                     a_valid;
  logic signed [PSUM_W-1:0] a_psum [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_key
    assign keys[l] = wb_rdata[l*MU +: MU];
  end

  mpu #(.R(R), .C(C), .K(K)) u_mpu (
    .clk, .rst_n,
    .in_valid (pa_v_q),
    .in_al    (al_q),
    .key_shift(c_key_shift),
    .key_col  (keys),
    .out_valid(a_valid),
    .psum     (a_psum)
  );

  // ---------------- offset ----------------
  fp16_t alpha [LANES];
  fp16_t zval  [LANES];
  fp32_t off   [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_sz
    assign alpha[l] = sm_rdata[l*16 +: 16];
    assign zval[l]  = zm_rdata[l*16 +: 16];
  end

  offset_unit #(.N(NIN), .LANES(LANES), .LAT(LAT)) u_off (
    .clk, .in_al(al_q), .in_e(emax_q), .z(zval), .off(off));

  // exponent of the token at the array output
  logic [FP16_EW-1:0] e_d [LAT];
  always_ff @(posedge clk) begin
    e_d[0] <= emax_q;
    for (int d = 1; d < LAT; d++) e_d[d] <= e_d[d-1];
  end

  // ---------------- tag pipeline ----------------
  tag_t tag_d [PIPE];
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int d = 0; d < PIPE; d++) tag_d[d] <= '0;
    end else begin
      tag_d[0] <= tag0;
      for (int d = 1; d < PIPE; d++) tag_d[d] <= tag_d[d-1];
    end
  end
  tag_t tag_o;
  assign tag_o = tag_d[PIPE-1];

  // the array's valid and the tag pipeline must agree
  assert property (@(posedge clk) disable iff (!rst_n) a_valid == tag_o.valid);

  // ---------------- scale & accumulator, psum and output buffers ----------------
  logic                 pb_re, pb_we, ob_we;
  logic [TAW-1:0]       pb_raddr, pb_waddr;
  logic [LANES*32-1:0]  pb_rdata, pb_wdata, ob_wdata;
  logic [OAW-1:0]       ob_waddr;

  scale_acc #(.LANES(LANES), .TAW(TAW), .OAW(OAW)) u_sacc (
    .clk, .rst_n,
    .in_valid(a_valid),
    .psum    (a_psum),
    .e       (e_d[LAT-1]),
    .alpha   (alpha),
    .off     (off),
    .tok     (tag_o.tok),
    .out_addr(tag_o.oaddr),
    .first   (tag_o.first),
    .add_off (tag_o.add_off),
    .last    (tag_o.last),
    .pb_re, .pb_raddr, .pb_rdata, .pb_we, .pb_waddr, .pb_wdata,
    .ob_we, .ob_waddr, .ob_wdata
  );

  sram_1r1w #(.W(LANES*32), .DEPTH(T_MX), .AW(TAW)) u_pbuf (
    .clk, .we(pb_we), .waddr(pb_waddr), .wdata(pb_wdata),
    .re(pb_re), .raddr(pb_raddr), .rdata(pb_rdata));

  sram_1r1w #(.W(LANES*32), .DEPTH(MT_MX*T_MX), .AW(OAW)) u_obuf (
    .clk, .we(ob_we), .waddr(ob_waddr), .wdata(ob_wdata),
    .re(ob_re), .raddr(ob_raddr), .rdata(ob_rdata));

endmodule
