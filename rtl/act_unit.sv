// act_unit -- sigmoid and tanh of a GRU gate pre-activation.
//
// Input: the 24-bit lane accumulator (12 fraction bits). Outputs: sigmoid and
// tanh of it as Q1.7 words. Purely combinational.
//
// Sigmoid uses the PLAN piecewise-linear approximation (slopes 1/4, 1/8, 1/32
// and 0, breakpoints 1, 2.375 and 5), built from shifts and adds so that it
// needs no multiplier or table:
//   |x| >= 5        : 1
//   2.375 <= |x| < 5: |x|/32 + 0.84375
//   1 <= |x| < 2.375: |x|/8  + 0.625
//   |x| < 1         : |x|/4  + 0.5
//   x < 0           : 1 - sigmoid(|x|)
// tanh is derived as tanh(x) = 2 sigmoid(2x) - 1. Results are rounded to
// Q1.7 (add half an LSB, shift) and clipped to [-128, 127], so 1.0 reads as
// 127/128. The paper lists sigmoid and tanh among the DSP operations but does
// not say how they are evaluated; the approximation is this design's choice.
module act_unit
  import fli_pkg::*;
(
  input  acc_t x,
  output q8_t  sig_o,
  output q8_t  tanh_o
);
  localparam int IW = ACC_W + 2;          // room for |2x|
  localparam logic signed [IW-1:0] ONE = IW'(1 << ACC_FRAC);

  // sigmoid of a value with ACC_FRAC fraction bits, same format out
  function automatic logic signed [IW-1:0] sig_fx(input logic signed [IW-1:0] v);
    logic signed [IW-1:0] a, y;
    a = (v < 0) ? -v : v;
    if (a >= 5 * ONE)                 y = ONE;
    else if (a >= (19 * ONE) / 8)     y = (a >>> 5) + (27 * ONE) / 32;
    else if (a >= ONE)                y = (a >>> 3) + (5 * ONE) / 8;
    else                              y = (a >>> 2) + ONE / 2;
    return (v < 0) ? ONE - y : y;
  endfunction

  function automatic q8_t to_q17(input logic signed [IW-1:0] v);
    logic signed [IW-1:0] r;
    r = (v + IW'(1 << (ACC_FRAC - ACT_FRAC - 1))) >>> (ACC_FRAC - ACT_FRAC);
    if (r > 127)       return q8_t'(127);
    else if (r < -128) return q8_t'(-128);
    else               return q8_t'(r);
  endfunction

  logic signed [IW-1:0] xe, s1, s2, t1;
  always_comb begin
    xe     = IW'(x);
    s1     = sig_fx(xe);
    s2     = sig_fx(xe <<< 1);
    t1     = (s2 <<< 1) - ONE;
    sig_o  = to_q17(s1);
    tanh_o = to_q17(t1);
  end
endmodule
