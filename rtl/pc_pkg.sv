// pc_pkg -- types and constants shared by the predictive-coding network.
//
// All numbers on the datapath are IEEE-754 binary32 words (fp32_t). The
// package also defines the per-layer activation selector, the stage encoding
// of the neural-core scheduler and a few float constants used as fixed
// operands of the multiply-add unit.
//
// The stage order PRED, ERR, BACKSUM, BACKVEC, WUP, STATE and the choice of
// single precision follow the source description; the numeric encodings of
// the enums are this design's own.
package pc_pkg;

  typedef logic [31:0] fp32_t;

  // Activation applied to a layer's state when the layer below consumes it.
  typedef enum logic [1:0] {
    ACT_LINEAR = 2'd0,
    ACT_RELU   = 2'd1,
    ACT_TANH   = 2'd2
  } act_e;

  // Neural-core schedule, one full pass per tick.
  typedef enum logic [2:0] {
    ST_IDLE    = 3'd0,
    ST_PRED    = 3'd1,
    ST_ERR     = 3'd2,
    ST_BACKSUM = 3'd3,
    ST_BACKVEC = 3'd4,
    ST_WUP     = 3'd5,
    ST_STATE   = 3'd6
  } stage_e;

  localparam fp32_t FP_POS_ZERO = 32'h0000_0000;
  localparam fp32_t FP_NEG_ZERO = 32'h8000_0000;
  localparam fp32_t FP_ONE      = 32'h3F80_0000;
  localparam fp32_t FP_NEG_ONE  = 32'hBF80_0000;
  localparam fp32_t FP_QNAN     = 32'h7FC0_0000;

  // Flip the sign of a binary32 word.
  function automatic fp32_t fp_neg(input fp32_t a);
    return {~a[31], a[30:0]};
  endfunction

endpackage
