// tt_pkg: types, constants and arithmetic shared by every layer of the
// integer-only Tiny Transformer accelerator.
//
// All activations are b-bit signed integers produced by uniform asymmetric
// quantisation, x_q = clamp(round(x/S) + Z, -2^(b-1), 2^(b-1)-1). A layer
// works on zero-point-corrected values (x_q - Z) and brings its wide
// accumulator back to b bits with a multiply-and-shift ("shift-based
// scaling"): y = clamp(((acc * M + 2^(N-1)) >>> N) + Zy). The multiplier M,
// the shift N and the zero points are per layer and loaded at run time; how
// they are packed is this design's own choice.
package tt_pkg;

  localparam int ACC_W   = 32;  // accumulator width of every MAC
  localparam int MULT_W  = 16;  // requantisation multiplier M (signed)
  localparam int SHIFT_W = 6;   // requantisation shift N
  localparam int ZP_W    = 16;  // zero points are kept wider than the data

  // Requantisation constants of one output tensor.
  typedef struct packed {
    logic signed [MULT_W-1:0] mult;
    logic [SHIFT_W-1:0]       shift;
    logic signed [ZP_W-1:0]   zero;
  } rq_t;

  // Parameter-load word addresses used by every leaf layer for its
  // quantisation constants, counted from the end of its weight/bias area.
  typedef enum logic [2:0] {
    QP_ZX    = 3'd0,   // input zero point
    QP_ZW    = 3'd1,   // weight / second operand zero point
    QP_MULT  = 3'd2,   // output multiplier
    QP_SHIFT = 3'd3,   // output shift
    QP_ZY    = 3'd4,   // output zero point
    QP_MULTB = 3'd5,   // second multiplier (element-wise add only)
    QP_SHIFTB= 3'd6    // second shift (element-wise add only)
  } qp_e;

  // Parameter-load targets (cfg_sel). Each composite block passes the
  // words of its own targets down; the numbers are this design's choice.
  // Inside the self-attention block:
  localparam logic [7:0] SEL_Q_LIN   = 8'd0;
  localparam logic [7:0] SEL_K_LIN   = 8'd1;
  localparam logic [7:0] SEL_V_LIN   = 8'd2;
  localparam logic [7:0] SEL_SCORE   = 8'd3;
  localparam logic [7:0] SEL_SOFTMAX = 8'd4;
  localparam logic [7:0] SEL_AV      = 8'd5;
  localparam logic [7:0] SEL_O_LIN   = 8'd6;
  // Inside the feed-forward block:
  localparam logic [7:0] SEL_FF1     = 8'd0;
  localparam logic [7:0] SEL_FF2     = 8'd1;
  // Inside the encoder layer (attention uses 0..6 as above):
  localparam logic [7:0] SEL_ADD1    = 8'd8;
  localparam logic [7:0] SEL_BN1     = 8'd9;
  localparam logic [7:0] SEL_FFN     = 8'd10;  // 10 + SEL_FF1/SEL_FF2
  localparam logic [7:0] SEL_ADD2    = 8'd12;
  localparam logic [7:0] SEL_BN2     = 8'd13;
  // At the top (the encoder uses 16 + its own numbers):
  localparam logic [7:0] SEL_IN_LIN  = 8'd0;
  localparam logic [7:0] SEL_PE_ADD  = 8'd1;
  localparam logic [7:0] SEL_PE_TAB  = 8'd2;
  localparam logic [7:0] SEL_ENC     = 8'd16;
  localparam logic [7:0] SEL_GAP     = 8'd32;
  localparam logic [7:0] SEL_OUT_LIN = 8'd33;

  // Multiply-and-shift with round-half-up, without zero point or clamp.
  function automatic logic signed [ACC_W-1:0] scale_shift(
      input logic signed [ACC_W-1:0] acc,
      input logic signed [MULT_W-1:0] mult,
      input logic [SHIFT_W-1:0] shift);
    logic signed [ACC_W+MULT_W-1:0] p;
    p = (ACC_W+MULT_W)'(acc) * (ACC_W+MULT_W)'(mult);
    if (shift != '0)
      p = (p + ((ACC_W+MULT_W)'(1) <<< (shift - 1))) >>> shift;
    return ACC_W'(p);
  endfunction

  // Saturate a wide signed value to a b-bit signed range.
  function automatic logic signed [ACC_W-1:0] sat(
      input logic signed [ACC_W-1:0] v, input int unsigned bits);
    logic signed [ACC_W-1:0] hi, lo;
    hi = (ACC_W'(1) <<< (bits - 1)) - 1;
    lo = -(ACC_W'(1) <<< (bits - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

  // Full requantisation of an accumulator to a b-bit output code.
  function automatic logic signed [ACC_W-1:0] requant(
      input logic signed [ACC_W-1:0] acc, input rq_t rq, input int unsigned bits);
    return sat(scale_shift(acc, rq.mult, rq.shift) + ACC_W'(rq.zero), bits);
  endfunction

endpackage
