// Shared types, number formats and the activation look-up-table generators of the
// Spartus DeltaLSTM accelerator.
//
// Number formats. Activations, states and deltas are 16-bit signed fixed point with
// 8 fractional bits (Q8.8); weights are 8-bit signed with 6 fractional bits; the
// local row index (LIDX) of a CBCSC weight is 8 bits; a PE accumulates into 48 bits,
// the width of an FPGA DSP accumulator. The 16-bit activation, 8-bit weight, 8-bit
// index and 48-bit accumulator widths follow the paper; the placement of the binary
// point (8 and 6 fractional bits) is this design's choice.
//
// Gate order. The stacked weight matrix has its row blocks in the order i, g, f, o,
// so the delta-memory entry of gate block b of a neuron slot q sits at accumulator
// address b*H_WORDS + q, where H_WORDS = hidden size / M.
//
// The sigmoid and tanh tables have 256 entries covering inputs in [-8, 8) in steps
// of 1/16 (index = clip(x) >>> 4, offset by 128). They are computed at elaboration
// time from the exact functions and rounded to Q8.8.
package spartus_pkg;

  localparam int ACT_W    = 16;
  localparam int ACT_FRAC = 8;
  localparam int W_W      = 8;
  localparam int W_FRAC   = 6;
  localparam int LIDX_W   = 8;
  localparam int ACC_W    = 48;
  localparam int LUT_N    = 256;

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [W_W-1:0]   wgt_t;
  typedef logic [LIDX_W-1:0]       lidx_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // One CBCSC entry as stored in a weight-memory word lane.
  typedef struct packed {
    wgt_t  w;
    lidx_t lidx;
  } wentry_t;

  // Gate blocks of the stacked weight matrix, in row order.
  typedef enum logic [1:0] {
    GATE_I = 2'd0,
    GATE_G = 2'd1,
    GATE_F = 2'd2,
    GATE_O = 2'd3
  } gate_e;

  typedef act_t lut_t [LUT_N];

  // Saturate a wide signed value to the 16-bit activation range.
  function automatic act_t sat_act(input logic signed [63:0] v);
    if (v > 64'sd32767)       return act_t'(16'sh7fff);
    else if (v < -64'sd32768) return act_t'(16'sh8000);
    else                      return act_t'(v[ACT_W-1:0]);
  endfunction

  // Table index of a Q8.8 input: clip to [-8, 8), step 1/16.
  function automatic logic [7:0] lut_index(input act_t x);
    logic signed [ACT_W-1:0] c;
    logic signed [ACT_W-1:0] q;
    if (x > 16'sd2047)       c = 16'sd2047;
    else if (x < -16'sd2048) c = -16'sd2048;
    else                     c = x;
    q = c >>> 4;
    return 8'(q + 16'sd128);
  endfunction

  function automatic lut_t gen_sigmoid();
    lut_t t;
    for (int k = 0; k < LUT_N; k++) begin
      real x;
      x = real'(k - LUT_N/2) / 16.0;
      t[k] = act_t'($rtoi(256.0 / (1.0 + $exp(-x)) + 0.5));
    end
    return t;
  endfunction

  function automatic lut_t gen_tanh();
    lut_t t;
    for (int k = 0; k < LUT_N; k++) begin
      real x, y;
      x = real'(k - LUT_N/2) / 16.0;
      y = 256.0 * (2.0 / (1.0 + $exp(-2.0 * x)) - 1.0);
      t[k] = act_t'((y >= 0.0) ? $rtoi(y + 0.5) : -$rtoi(-y + 0.5));
    end
    return t;
  endfunction

endpackage
