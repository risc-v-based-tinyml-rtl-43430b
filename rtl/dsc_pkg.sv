// dsc_pkg: sizes, types and shared arithmetic of the fused depthwise-separable
// convolution (DSC) accelerator.
//
// The accelerator computes a MobileNetV2 inverted residual block
// (1x1 expansion -> 3x3 depthwise -> 1x1 projection) one output pixel at a
// time, streaming every intermediate value straight from one engine to the next.
// The sizes below are the ones the design is built around: nine expansion
// engines of eight MAC lanes, one nine-tap depthwise engine, 56 projection
// engines, a nine-bank 256 x 64-bit input buffer, a 4096 x 64-bit expansion
// filter buffer and a nine-bank 512-deep depthwise filter buffer. The depth of
// the projection weight buffers, all bit widths of the configuration and the
// requantization arithmetic are this design's own choices.
//
// Requantization follows the single-rounding fixed-point form used by
// TensorFlow Lite for int8 models: y = clamp(zp + round((acc + bias) * mult /
// 2^(31 - shift)), act_min, act_max), with rounding half up; the scaled value
// saturates to int16 and the zero point is added in 17 bits. ReLU and ReLU6
// are expressed through act_min/act_max, as the converter does for fused
// activations.
package dsc_pkg;

  // ---- sizes -------------------------------------------------------------
  localparam int unsigned EX_ENGINES    = 9;     // 3x3 tile, one engine per pixel
  localparam int unsigned EX_LANES      = 8;     // eight-way MAC tree per engine
  localparam int unsigned DW_TAPS       = 9;     // 3x3 depthwise kernel
  localparam int unsigned PR_ENGINES    = 56;    // projection engines
  localparam int unsigned IF_BANKS      = 9;
  localparam int unsigned IF_DEPTH      = 256;   // words per IFMAP bank
  localparam int unsigned EXW_DEPTH     = 4096;  // expansion filter words
  localparam int unsigned DWW_DEPTH     = 512;   // depthwise filters
  localparam int unsigned PRW_DEPTH     = 512;   // projection weights per engine

  localparam int unsigned WORD_W = EX_LANES * 8; // 64-bit buffer word

  typedef logic signed [7:0]  int8_t;
  typedef logic signed [8:0]  off_t;   // input offset = -(input zero point)
  typedef logic signed [31:0] acc_t;

  // Per-channel post-processing parameters held in the bias buffers.
  typedef struct packed {
    logic signed [31:0] bias;
    logic signed [31:0] mult;   // Q31 multiplier
    logic signed [7:0]  shift;  // power-of-two exponent, -31..30
  } qparam_t;

  typedef enum logic [1:0] {QF_BIAS = 2'd0, QF_MULT = 2'd1, QF_SHIFT = 2'd2} qfield_e;

  // Layer configuration written by the CPU before a run.
  typedef struct packed {
    logic [7:0]  h;          // feature map height (= output height, stride 1)
    logic [7:0]  w;          // feature map width
    logic [5:0]  nc;         // input channels / 8
    logic [9:0]  m;          // expanded channels
    logic [6:0]  cout;       // output channels, 1..56
    off_t        ex_in_off;  // -(IFMAP zero point)
    off_t        dw_in_off;  // -(F1 zero point)
    off_t        pr_in_off;  // -(F2 zero point)
    int8_t       ex_zp, dw_zp, pr_zp;        // output zero points
    int8_t       ex_min, ex_max;             // activation clamp
    int8_t       dw_min, dw_max;
    int8_t       pr_min, pr_max;
  } layer_cfg_t;

  // Configuration register numbers (funct7 of the CFG instruction).
  typedef enum logic [4:0] {
    CR_H = 5'd0, CR_W, CR_NC, CR_M, CR_COUT,
    CR_EX_IN_OFF, CR_DW_IN_OFF, CR_PR_IN_OFF,
    CR_EX_ZP, CR_DW_ZP, CR_PR_ZP,
    CR_EX_MIN, CR_EX_MAX, CR_DW_MIN, CR_DW_MAX, CR_PR_MIN, CR_PR_MAX
  } cfg_reg_e;

  // funct3 of the CFU instructions.
  typedef enum logic [2:0] {
    OP_CFG = 3'd0, OP_IFMAP = 3'd1, OP_EXW = 3'd2, OP_DWW = 3'd3,
    OP_PRW = 3'd4, OP_QPARAM = 3'd5, OP_START = 3'd6, OP_READ = 3'd7
  } op_e;

  // Bank and word address of one stored pixel chunk. row and col are
  // non-negative feature map coordinates; the pixel lies in bank
  // (row mod 3)*3 + (col mod 3) at word ((row/3)*ceil(w/3) + col/3)*nc + chunk.
  function automatic logic [3:0] bank_of(input logic [8:0] row, input logic [8:0] col);
    return 4'((row % 9'd3) * 9'd3 + (col % 9'd3));
  endfunction

  function automatic logic [7:0] addr_of(input logic [8:0] row, input logic [8:0] col,
                                         input logic [7:0] w, input logic [5:0] nc,
                                         input logic [5:0] chunk);
    logic [15:0] wb;
    wb = (16'(w) + 16'd2) / 16'd3;
    return 8'(((16'(row) / 16'd3) * wb + 16'(col) / 16'd3) * 16'(nc) + 16'(chunk));
  endfunction

  // acc + bias, scaled by mult * 2^(shift-31) with round-half-up, plus the
  // zero point, clamped to [lo, hi].
  function automatic int8_t requant(input acc_t acc, input qparam_t q,
                                    input int8_t zp, input int8_t lo, input int8_t hi);
    logic signed [32:0] x;
    logic signed [65:0] p;
    logic signed [65:0] rnd;
    logic signed [65:0] s;
    logic signed [16:0] y;
    logic signed [7:0]  shv;
    logic signed [8:0]  shn;
    logic [5:0]         sh;
    x = 33'(acc) + 33'(q.bias);
    p = 66'(x) * 66'(q.mult);
    // right-shift amount 31 - shift, limited to 1..62
    shv = q.shift;
    shn = 9'sd31 - {shv[7], shv};
    if (shn < 9'sd1) sh = 6'd1;
    else if (shn > 9'sd62) sh = 6'd62;
    else sh = shn[5:0];
    rnd = 66'(1) <<< (sh - 6'd1);
    s = (p + rnd) >>> sh;
    if (s > 66'sd32767) y = 17'sd32767;
    else if (s < -66'sd32768) y = -17'sd32768;
    else y = 17'(s);
    y = y + 17'(zp);   // 17 bits: the zero point cannot wrap a saturated value
    if (y < 17'(lo)) y = 17'(lo);
    if (y > 17'(hi)) y = 17'(hi);
    return int8_t'(y);
  endfunction

endpackage
