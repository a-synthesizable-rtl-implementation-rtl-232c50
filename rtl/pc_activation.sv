// pc_activation -- element-wise activation f(x) and its derivative f'(x).
//
// Each layer selects one activation (parameter ACT). A neuron applies it in
// two places: to the raw states it receives from the layer above, when it
// forms its prediction and its weight update, and as the derivative of its
// own effective state, which gates the bottom-up error term of the state
// update. Both values are produced here, combinationally, for one input.
//
//   ACT_LINEAR  f(x) = x            f'(x) = 1
//   ACT_RELU    f(x) = max(x, +0)   f'(x) = 1 if x > 0 else 0
//   ACT_TANH    f(x) = tanh(x)      f'(x) = 1 - tanh(x)^2
//
// tanh is evaluated in fixed point: |x| is converted to an unsigned Q3.24
// number, a 129-entry table of tanh(k/16), k = 0..128, in Q0.24 is indexed by
// the integer part of 16|x|, and the remaining 20 bits interpolate linearly
// between neighbouring entries. For |x| >= 8 the result saturates to 1.0.
// The derivative is 1 - t*t formed from the same interpolated t. Absolute
// error is below 4e-4 for f and below 8e-4 for f'. The table is computed
// at elaboration time from $tanh, so no data file is needed. Both Q0.24
// results have at most 24 significant bits and convert to binary32 exactly.
//
// The three activations are the ones the network's experiments use (a
// linear input layer, ReLU or tanh hidden layers); how tanh is approximated
// in hardware is this design's own choice. NaN inputs are passed through by
// the linear mode and treated as non-positive by ReLU.
module pc_activation
  import pc_pkg::*;
#(
  parameter act_e ACT = ACT_RELU
) (
  input  fp32_t x,
  output fp32_t f,
  output fp32_t fd
);

  localparam int LUT_N = 129;
  typedef logic [24:0] lut_t [LUT_N];

  function automatic lut_t build_lut();
    lut_t t;
    for (int k = 0; k < LUT_N; k++)
      t[k] = 25'($rtoi($tanh(real'(k) / 16.0) * 16777216.0 + 0.5));
    return t;
  endfunction

  localparam lut_t TANH_LUT = build_lut();

  // Unsigned Q0.24 value (at most 2^24) to binary32; exact.
  function automatic fp32_t q24_to_fp(input logic [24:0] v);
    int   p;
    logic [22:0] frac;
    p = -1;
    for (int i = 0; i < 25; i++) if (v[i]) p = i;
    if (p < 0) return FP_POS_ZERO;
    frac = 23'((v << (24 - p)) >> 1);     // bits 23..1 of the normalised value
    return {1'b0, 8'(127 + p - 24), frac};
  endfunction

  logic       sx;
  logic [7:0] ex;
  logic [22:0] mx;
  assign {sx, ex, mx} = x;

  logic x_pos;
  assign x_pos = !sx && (ex != 8'd0 || mx != 23'd0) && !(ex == 8'hFF && mx != 23'd0);

  // tanh datapath
  logic [26:0] q;          // |x| in Q3.24
  logic        sat;
  logic [24:0] t_q24;      // tanh(|x|) in Q0.24
  logic [24:0] d_q24;      // 1 - tanh^2 in Q0.24

  always_comb begin
    logic [23:0] mant;
    logic [6:0]  k;
    logic [19:0] fr;
    logic [24:0] lo, hi;
    logic [45:0] prod;
    logic [49:0] sq;
    int          sh;
    mant = {(ex != 8'd0), mx};
    sat  = (ex >= 8'd130);                 // |x| >= 8, also inf and NaN
    sh   = int'(ex) - 126;                 // q = mant * 2^(ex - 126)
    if (sat)        q = '1;
    else if (sh >= 0) q = 27'({3'b000, mant} << sh);
    else            q = 27'({3'b000, mant} >> (-sh));
    k    = q[26:20];
    fr   = q[19:0];
    lo   = TANH_LUT[{1'b0, k}];
    hi   = TANH_LUT[{1'b0, k} + 8'd1];
    prod = 46'(hi - lo) * 46'(fr);
    t_q24 = sat ? 25'h100_0000 : lo + 25'(prod >> 20);
    sq    = 50'(t_q24) * 50'(t_q24);       // Q0.48
    d_q24 = 25'h100_0000 - 25'(sq >> 24);
  end

  always_comb begin
    unique case (ACT)
      ACT_RELU: begin
        f  = x_pos ? x : FP_POS_ZERO;
        fd = x_pos ? FP_ONE : FP_POS_ZERO;
      end
      ACT_TANH: begin
        f  = q24_to_fp(t_q24) | {sx, 31'd0};
        fd = q24_to_fp(d_q24);
      end
      default: begin
        f  = x;
        fd = FP_ONE;
      end
    endcase
  end

endmodule
