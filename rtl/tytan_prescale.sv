// tytan_prescale: input-side add-on, scales an element before the TYTAN core.
//
// The paper's mode figure puts a constant multiplier in front of TYTAN for two
// activations: x2 for tanh (T(2x)) and x1.702 for GELU (T(1.702x)). This stage
// holds one element and multiplies its operand v by that constant; in every
// other mode it multiplies by 1.0, so every element sees the same latency. The
// original input x and the last flag pass through untouched.
//
// Timing: an element is taken when the stage is empty (in_ready), spends
// MUL_LAT cycles in the multiplier and is then offered on out_* until taken.
// A new element can enter one cycle after the previous one leaves, so the
// stage holds one element at a time. mode must stay constant while elements
// are in flight.
module tytan_prescale
  import tytan_pkg::*;
#(
  parameter int unsigned MUL_LAT = 10  // multiplier pipeline stages, >= 1
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

  typedef enum logic [1:0] {P_EMPTY, P_WAIT, P_FULL} pstate_t;

  localparam int unsigned CW = $clog2(MUL_LAT + 1);

  pstate_t       state;
  elem_t         e;
  fp32_t         scale, y;
  logic [CW-1:0] cnt;

  always_comb begin
    unique case (mode)
      MODE_TANH: scale = FP_TWO;
      MODE_GELU: scale = FP_GELU_K;
      default:   scale = FP_ONE;
    endcase
  end

  fp32_mul #(.LATENCY(MUL_LAT)) u_mul (.clk(clk), .a(e.v), .b(scale), .y(y));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= P_EMPTY;
      e     <= '0;
      cnt   <= '0;
    end else begin
      unique case (state)
        P_EMPTY:
          if (in_valid) begin
            e     <= in_data;
            cnt   <= CW'(MUL_LAT - 1);
            state <= P_WAIT;
          end
        P_WAIT:
          if (cnt == '0) state <= P_FULL;
          else           cnt   <= cnt - 1'b1;
        P_FULL:
          if (out_ready) state <= P_EMPTY;
        default:
          state <= P_EMPTY;
      endcase
    end
  end

  assign in_ready  = (state == P_EMPTY);
  assign out_valid = (state == P_FULL);
  assign out_data  = '{x: e.x, v: y, last: e.last};

  initial begin
    if (MUL_LAT < 1) $error("tytan_prescale: MUL_LAT must be at least 1");
  end

endmodule
