// figlut_pkg -- constants and helpers shared by the FIGLUT-I datapath.
//
// The accelerator computes y = sum_i alpha_i * (B_i x) + z * sum(x) for
// binary-coded (BCQ) weights B_i in {-1,+1} and FP16 activations x.  Groups of
// MU activations are turned into a look-up table of all signed sums, and each
// read-accumulate unit (RAC) fetches one entry with a MU-bit weight key.
//
// Values that follow the paper: MU = 4 activations per key, 32 RACs per PE,
// FP16 activations, FP32 accumulation, half-size LUT (2^(MU-1) entries).
// The array shape (4 rows x 8 columns) is read from the "8 x 4 array" and the
// "7-stage input buffers" remark.  The integer widths (4 guard bits below the
// FP16 mantissa, truncating alignment) are this design's own choice.
//
// Key convention (as in the paper's key/value table): a key bit of 1 means
// weight +1, 0 means -1, and the key MSB belongs to the first activation of
// the group.
package figlut_pkg;

  // ---- LUT / PE organisation (paper) ----
  localparam int MU      = 4;              // activations per LUT key
  localparam int HLUT_N  = 1 << (MU - 1);  // half-size LUT entries
  localparam int K_RAC   = 32;             // RACs sharing one LUT
  localparam int ROWS    = 4;              // PE rows (output direction)
  localparam int COLS    = 8;              // PE columns (reduction direction)

  // ---- number formats ----
  localparam int FP16_EW   = 5;
  localparam int FP16_MW   = 10;
  localparam int FP16_BIAS = 15;
  localparam int FP32_EW   = 8;
  localparam int FP32_MW   = 23;
  localparam int FP32_BIAS = 127;

  // ---- integer datapath after pre-alignment (design choice) ----
  localparam int GUARD   = 4;                          // extra LSBs kept when shifting
  localparam int ALIGN_W = 1 + (FP16_MW + 1) + GUARD;  // sign + 11-bit significand + guard = 16
  localparam int LUT_W   = ALIGN_W + $clog2(MU);       // one LUT entry: sum of MU values
  localparam int PSUM_W  = LUT_W + $clog2(COLS);       // sum over one row of PEs

  // ---- buffer capacities (design choice, sized for a 1024x1024 layer, 128 tokens) ----
  localparam int T_MAX  = 128;   // tokens (activation columns) per operation
  localparam int KT_MAX = 32;    // reduction tiles: 32 x (COLS*MU) = 1024 inputs
  localparam int MT_MAX = 8;     // output tiles:    8 x (ROWS*K_RAC) = 1024 outputs
  localparam int Q_MAX  = 8;     // bit planes (Q1 .. Q8)

  typedef logic [15:0] fp16_t;
  typedef logic [31:0] fp32_t;

  // Half-LUT decoder: index into the stored half and whether to negate.
  // Stored entry j holds  +x0 + sum_b (j[b] ? +x : -x)  for the lower MU-1 keys.
  function automatic logic [MU-2:0] hlut_index(input logic [MU-1:0] key);
    return key[MU-1] ? key[MU-2:0] : ~key[MU-2:0];
  endfunction

  function automatic logic hlut_negate(input logic [MU-1:0] key);
    return ~key[MU-1];
  endfunction

endpackage
