// tytan_pkg: types and constants shared by the TYTAN activation engine.
//
// All data in the engine is IEEE-754 single precision (FP32), carried as raw
// 32-bit patterns (fp32_t). An element travelling between the stages of the
// engine is an elem_t: the original input x (needed by the Swish, GELU and SELU
// add-ons after the polynomial has been evaluated), the working value v (the
// operand of the next stage, later the stage result) and a last flag that marks
// the final element of a batch.
//
// The activation modes follow the six example modes of the paper's
// architecture figure, plus MODE_POLY which returns the raw polynomial T(x).
// The constants are the FP32 encodings of the scale factors printed in that
// figure (2, 1.702) and of the standard SELU constants lambda and lambda*alpha,
// whose values the paper does not print.
package tytan_pkg;

  typedef logic [31:0] fp32_t;

  typedef enum logic [2:0] {
    MODE_POLY     = 3'd0,  // T(x)
    MODE_SIGMOID  = 3'd1,  // T(x) / (T(x) + 1)
    MODE_SWISH    = 3'd2,  // x * T(x)
    MODE_GELU     = 3'd3,  // x * T(1.702 x)
    MODE_TANH     = 3'd4,  // (T(2x) - 1) / (T(2x) + 1)
    MODE_SOFTPLUS = 3'd5,  // T_b(T_a(x)), two cores in series
    MODE_SELU     = 3'd6   // x < 0 ? lambda*alpha*(T(x) - 1) : lambda*x
  } mode_t;

  typedef struct packed {
    fp32_t x;     // original input element
    fp32_t v;     // value being worked on
    logic  last;  // final element of a batch
  } elem_t;

  localparam fp32_t FP_ZERO        = 32'h0000_0000;
  localparam fp32_t FP_ONE         = 32'h3F80_0000;  //  1.0
  localparam fp32_t FP_MINUS_ONE   = 32'hBF80_0000;  // -1.0
  localparam fp32_t FP_TWO         = 32'h4000_0000;  //  2.0
  localparam fp32_t FP_GELU_K      = 32'h3FD9_DB23;  //  1.702
  localparam fp32_t FP_SELU_LAMBDA = 32'h3F86_7D5F;  //  1.0507009873554805
  localparam fp32_t FP_SELU_LA     = 32'h3FE1_0966;  //  1.0507009873554805 * 1.6732632423543772
  localparam fp32_t FP_QNAN        = 32'h7FC0_0000;

endpackage
