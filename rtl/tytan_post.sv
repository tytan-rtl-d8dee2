// tytan_post: output-side add-ons, map the TYTAN result T to the activation.
//
// Implements the add-on networks of the paper's mode figure, on one shared
// set of units (two adders with the constants -1 and +1, a multiplier and a
// divider), selected by mode:
//   MODE_POLY, MODE_SOFTPLUS  T (no add-on; Softplus is two cores in series)
//   MODE_SIGMOID              T / (T + 1)
//   MODE_SWISH, MODE_GELU     x * T
//   MODE_TANH                 (T - 1) / (T + 1)
//   MODE_SELU                 x < 0 ? lambda*alpha * (T - 1) : lambda * x
// Here x is the element's original input, carried alongside. For SELU the
// paper's figure and its equation place lambda*alpha differently (figure:
// scale the input of TYTAN; equation: scale the TYTAN result and subtract 1);
// this design scales (T - 1), which is SELU when T approximates e^x. The
// multiplexer select, "input < 0", is printed in the paper's figure.
//
// Timing: an element is taken when the stage is empty. Modes that use the
// adders wait ADD_LAT cycles for them, then MUL_LAT (multiply) or DIV_LAT
// (divide) cycles; Swish and GELU need no adder and wait MUL_LAT only; POLY
// and Softplus pass straight through. The result is then offered on out_*
// until taken. mode must stay constant while elements are in flight.
module tytan_post
  import tytan_pkg::*;
#(
  parameter int unsigned MUL_LAT = 10,  // multiplier pipeline stages, >= 1
  parameter int unsigned ADD_LAT = 9,   // adder pipeline stages, >= 1
  parameter int unsigned DIV_LAT = 3    // divider pipeline stages, >= 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  mode_t mode,
  input  logic  in_valid,
  output logic  in_ready,
  input  elem_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output elem_t out_data
);

  typedef enum logic [1:0] {Q_EMPTY, Q_WAIT_ADD, Q_WAIT_OP, Q_FULL} qstate_t;

  localparam int unsigned MAXL = (MUL_LAT > ADD_LAT) ? ((MUL_LAT > DIV_LAT) ? MUL_LAT : DIV_LAT)
                                                     : ((ADD_LAT > DIV_LAT) ? ADD_LAT : DIV_LAT);
  localparam int unsigned CW = $clog2(MAXL + 1);

  qstate_t       state;
  elem_t         e;
  logic [CW-1:0] cnt;
  fp32_t         t_m1, t_p1;       // T - 1, T + 1
  fp32_t         mul_a, mul_b, mul_y;
  fp32_t         div_a, div_y;
  fp32_t         res;
  logic          x_neg;
  logic          uses_add, uses_div;

  assign x_neg    = e.x[31] && (e.x[30:0] != '0);
  assign uses_add = (mode == MODE_SIGMOID) || (mode == MODE_TANH) || (mode == MODE_SELU);
  assign uses_div = (mode == MODE_SIGMOID) || (mode == MODE_TANH);

  fp32_add #(.LATENCY(ADD_LAT)) u_sub1 (.clk(clk), .a(e.v), .b(FP_MINUS_ONE), .y(t_m1));
  fp32_add #(.LATENCY(ADD_LAT)) u_add1 (.clk(clk), .a(e.v), .b(FP_ONE),       .y(t_p1));

  always_comb begin
    if (mode == MODE_SELU) begin
      mul_a = x_neg ? FP_SELU_LA : FP_SELU_LAMBDA;
      mul_b = x_neg ? t_m1       : e.x;
    end else begin
      mul_a = e.x;
      mul_b = e.v;
    end
  end
  fp32_mul #(.LATENCY(MUL_LAT)) u_mul (.clk(clk), .a(mul_a), .b(mul_b), .y(mul_y));

  assign div_a = (mode == MODE_TANH) ? t_m1 : e.v;
  fp32_div #(.LATENCY(DIV_LAT)) u_div (.clk(clk), .a(div_a), .b(t_p1), .y(div_y));

  always_comb begin
    unique case (mode)
      MODE_SIGMOID, MODE_TANH:           res = div_y;
      MODE_SWISH, MODE_GELU, MODE_SELU:  res = mul_y;
      default:                           res = e.v;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= Q_EMPTY;
      e     <= '0;
      cnt   <= '0;
    end else begin
      unique case (state)
        Q_EMPTY:
          if (in_valid) begin
            e <= in_data;
            if (uses_add) begin
              cnt   <= CW'(ADD_LAT - 1);
              state <= Q_WAIT_ADD;
            end else if (mode == MODE_SWISH || mode == MODE_GELU) begin
              cnt   <= CW'(MUL_LAT - 1);
              state <= Q_WAIT_OP;
            end else begin
              state <= Q_FULL;
            end
          end
        Q_WAIT_ADD:
          if (cnt == '0) begin
            cnt   <= uses_div ? CW'(DIV_LAT - 1) : CW'(MUL_LAT - 1);
            state <= Q_WAIT_OP;
          end else begin
            cnt <= cnt - 1'b1;
          end
        Q_WAIT_OP:
          if (cnt == '0) state <= Q_FULL;
          else           cnt   <= cnt - 1'b1;
        Q_FULL:
          if (out_ready) state <= Q_EMPTY;
        default:
          state <= Q_EMPTY;
      endcase
    end
  end

  assign in_ready  = (state == Q_EMPTY);
  assign out_valid = (state == Q_FULL);
  assign out_data  = '{x: e.x, v: res, last: e.last};

  initial begin
    if (MUL_LAT < 1 || ADD_LAT < 1 || DIV_LAT < 1) $error("tytan_post: latencies must be at least 1");
  end

endmodule
