// figlut_ctrl -- tile sequencer for the weight-stationary, bit-serial dataflow.
//
// An operation multiplies an (n_mt*ROWS*K) x (n_kt*COLS*MU) weight matrix of
// q binary planes with n_tok activation columns.  The loop order is the
// paper's BCQ fetch order: tokens innermost (one per cycle, the weight tile
// stays in the array), then the bit plane (the next plane of the same tile is
// loaded), then the reduction tile, then the output tile.  For every
// (output tile, reduction tile, plane) the controller
//   LOAD   reads the COLS weight words of the tile, highest column first, and
//          shifts them into the array (COLS+1 cycles; the scale and offset
//          words of the tile are read in the first cycle),
//   STREAM reads one token per cycle from the input buffer and issues it with
//          its tag (token, output address, first/offset/last flags),
//   DRAIN  waits DRAIN cycles until the last token has left the array and
//          the accumulator, so that keys and scale factors may change.
// `done` pulses for one cycle when the last tile has drained.  The runtime
// precision q (1..Q_MAX) is what makes one array serve Q1..Q8 and mixed
// precision layers.
//
// From the paper: weight stationary, the fetch order, bit-serial planes.
// This design's choices: single-buffered keys (loading and draining are not
// overlapped with streaming), buffer address maps, a start/done handshake.
module figlut_ctrl #(
  parameter int COLS   = 8,
  parameter int T_MAX  = 128,
  parameter int KT_MAX = 32,
  parameter int MT_MAX = 8,
  parameter int Q_MAX  = 8,
  parameter int DRAIN  = 16,
  parameter int TAW    = $clog2(T_MAX),
  parameter int IAW    = $clog2(KT_MAX * T_MAX),
  parameter int WAW    = $clog2(MT_MAX * KT_MAX * Q_MAX * COLS),
  parameter int SAW    = $clog2(MT_MAX * KT_MAX * Q_MAX),
  parameter int ZAW    = $clog2(MT_MAX * KT_MAX),
  parameter int OAW    = $clog2(MT_MAX * T_MAX)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [$clog2(Q_MAX+1)-1:0]   cfg_q,
  input  logic [$clog2(KT_MAX+1)-1:0]  cfg_kt,
  input  logic [$clog2(MT_MAX+1)-1:0]  cfg_mt,
  input  logic [$clog2(T_MAX+1)-1:0]   cfg_tok,
  output logic                         busy,
  output logic                         done,
  // weight buffer and key loading
  output logic                         wb_re,
  output logic [WAW-1:0]               wb_raddr,
  output logic                         key_shift,
  // scale (alpha) and offset (z) buffers
  output logic                         sm_re,
  output logic [SAW-1:0]               sm_raddr,
  output logic [ZAW-1:0]               zm_raddr,
  // input buffer and token tag
  output logic                         ib_re,
  output logic [IAW-1:0]               ib_raddr,
  output logic [TAW-1:0]               tag_tok,
  output logic [OAW-1:0]               tag_oaddr,
  output logic                         tag_first,
  output logic                         tag_add_off,
  output logic                         tag_last
);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_STREAM, S_DRAIN} state_t;

  state_t state;
  int unsigned cnt, plane, kt, mt;
  int unsigned n_q, n_kt, n_mt, n_tok;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt <= 0; plane <= 0; kt <= 0; mt <= 0;
      n_q <= 1; n_kt <= 1; n_mt <= 1; n_tok <= 1;
      done <= 1'b0;
      key_shift <= 1'b0;
    end else begin
      done      <= 1'b0;
      key_shift <= wb_re;
      unique case (state)
        S_IDLE: if (start) begin
          n_q   <= int'(cfg_q);
          n_kt  <= int'(cfg_kt);
          n_mt  <= int'(cfg_mt);
          n_tok <= int'(cfg_tok);
          plane <= 0; kt <= 0; mt <= 0; cnt <= 0;
          state <= S_LOAD;
        end
        S_LOAD: begin
          if (cnt == COLS) begin cnt <= 0; state <= S_STREAM; end
          else cnt <= cnt + 1;
        end
        S_STREAM: begin
          if (cnt == n_tok - 1) begin cnt <= 0; state <= S_DRAIN; end
          else cnt <= cnt + 1;
        end
        S_DRAIN: begin
          if (cnt == DRAIN - 1) begin
            cnt   <= 0;
            state <= S_LOAD;
            if (plane + 1 < n_q) plane <= plane + 1;
            else begin
              plane <= 0;
              if (kt + 1 < n_kt) kt <= kt + 1;
              else begin
                kt <= 0;
                if (mt + 1 < n_mt) mt <= mt + 1;
                else begin
                  mt    <= 0;
                  state <= S_IDLE;
                  done  <= 1'b1;
                end
              end
            end
          end else cnt <= cnt + 1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // ---- addresses ----
  int unsigned tile_q;   // (mt, kt, plane) tile index
  assign tile_q = (mt * KT_MAX + kt) * Q_MAX + plane;

  assign wb_re    = (state == S_LOAD) && (cnt < COLS);
  assign wb_raddr = WAW'(tile_q * COLS + (COLS - 1 - cnt));
  assign sm_re    = (state == S_LOAD) && (cnt == 0);
  assign sm_raddr = SAW'(tile_q);
  assign zm_raddr = ZAW'(mt * KT_MAX + kt);

  assign ib_re       = (state == S_STREAM);
  assign ib_raddr    = IAW'(kt * T_MAX + cnt);
  assign tag_tok     = TAW'(cnt);
  assign tag_oaddr   = OAW'(mt * T_MAX + cnt);
  assign tag_first   = (plane == 0) && (kt == 0);
  assign tag_add_off = (plane == n_q - 1);
  assign tag_last    = (plane == n_q - 1) && (kt == n_kt - 1);

  // a plane count of zero or tiles beyond the buffers are not supported
  assert property (@(posedge clk) disable iff (!rst_n)
                   (start && state == S_IDLE) |-> (cfg_q >= 1 && int'(cfg_q) <= Q_MAX &&
                    cfg_kt >= 1 && int'(cfg_kt) <= KT_MAX && cfg_mt >= 1 &&
                    int'(cfg_mt) <= MT_MAX && cfg_tok >= 1 && int'(cfg_tok) <= T_MAX));

endmodule
