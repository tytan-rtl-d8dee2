// tytan_core: one TYTAN unit, a MAC that evaluates a programmed polynomial.
//
// For every input element x the core computes, by Horner's rule (nested
// multiplication),
//     T(x) = c0 + x*(c1 + x*(c2 + ... + x*(c[n-1]) ... ))
// with the n coefficients held in its internal coefficient buffer. As the
// paper describes, the accumulator starts at zero, so the first step adds the
// first coefficient to zero; every later step multiplies the accumulator by x
// and adds the next coefficient. The structure follows the paper's TYTAN
// figure: the input value and the current coefficient sit in registers (RF),
// an FP32 multiplier forms acc*x and an FP32 adder adds the coefficient; the
// adder result is fed back as the new accumulator and is also the output.
//
// Sequencing follows the paper's state diagram. Per element:
//   INIT    clear accumulator and term index            ("Ready")
//   FETCH   wait for and take one element from the input ("Signal Loaded")
//   LOAD    coefficient register <= next coefficient
//   CHECK   after LOAD: go multiply; after an addition: take the sum into the
//           accumulator, then LOAD again if terms remain ("More Terms"),
//           else SAVE ("Complete")
//   COMPUTE start acc*x                                  ("Processing")
//   WAIT_MUL MUL_LAT cycles for the multiplier            ("Computed")
//   ADD     start product + coefficient                  ("Adding")
//   WAIT_ADD ADD_LAT cycles for the adder                 ("Done Addition")
//   SAVE    offer the result; then INIT for the next element ("Next Cycle"),
//           or IDLE if the element carried the last flag ("Finish")
// IDLE leaves for INIT once an element is waiting and coefficients are loaded.
// The transition labels are the paper's; which condition drives the unlabelled
// transitions (IDLE->INIT, LOAD->CHECK, CHECK->COMPUTE) is this design's
// choice.
//
// Timing: with elements always available and the result taken at once, one
// element takes 3 + n*(5 + MUL_LAT + ADD_LAT) cycles from INIT to SAVE
// (723 cycles for n = 30 at the default latencies). The latency depends only
// on n, not on the activation, as the paper states.
//
// Interface: elements arrive on in_* and leave on out_* with a valid/ready
// handshake (elem_t: original input x, operand v, last flag; the result
// replaces v, x and last pass through). The coefficient port (coef_clear,
// coef_wr_en, coef_wr_data) may only be used while the core is idle.
module tytan_core
  import tytan_pkg::*;
#(
  parameter int unsigned N_MAX   = 30,  // coefficient buffer depth
  parameter int unsigned MUL_LAT = 10,  // multiplier pipeline stages, >= 1
  parameter int unsigned ADD_LAT = 9    // adder pipeline stages, >= 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // coefficient programming port
  input  logic                       coef_clear,
  input  logic                       coef_wr_en,
  input  fp32_t                      coef_wr_data,
  output logic [$clog2(N_MAX+1)-1:0] n_terms,
  output logic                       coef_full,
  // element stream in
  input  logic                       in_valid,
  output logic                       in_ready,
  input  elem_t                      in_data,
  // element stream out
  output logic                       out_valid,
  input  logic                       out_ready,
  output elem_t                      out_data,
  output logic                       busy
);

  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_FETCH, S_LOAD, S_CHECK,
    S_COMPUTE, S_WAIT_MUL, S_ADD, S_WAIT_ADD, S_SAVE
  } state_t;

  localparam int unsigned KW = $clog2(N_MAX + 1);
  localparam int unsigned CW = $clog2(((MUL_LAT > ADD_LAT) ? MUL_LAT : ADD_LAT) + 1);

  state_t           state;
  elem_t            rf_x;        // input register (RF)
  fp32_t            rf_c;        // coefficient register (RF)
  fp32_t            acc;         // accumulator
  fp32_t            add_a, add_b;
  fp32_t            mul_y, add_y;
  fp32_t            coef_rd;
  logic [KW-1:0]    k;           // index of the next coefficient
  logic [CW-1:0]    cnt;         // wait counter
  logic             loaded;      // a coefficient is loaded but not yet used

  coef_buffer #(.DEPTH(N_MAX)) u_coef (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (coef_clear),
    .wr_en   (coef_wr_en),
    .wr_data (coef_wr_data),
    .rd_idx  (k[$clog2(N_MAX)-1:0]),
    .rd_data (coef_rd),
    .n_terms (n_terms),
    .full    (coef_full)
  );

  // acc * x: both operands are registers that hold still from COMPUTE to ADD.
  fp32_mul #(.LATENCY(MUL_LAT)) u_mul (.clk(clk), .a(acc), .b(rf_x.v), .y(mul_y));
  // product + coefficient, operands captured in ADD.
  fp32_add #(.LATENCY(ADD_LAT)) u_add (.clk(clk), .a(add_a), .b(add_b), .y(add_y));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      rf_x   <= '0;
      rf_c   <= '0;
      acc    <= '0;
      add_a  <= '0;
      add_b  <= '0;
      k      <= '0;
      cnt    <= '0;
      loaded <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE:
          if (in_valid && n_terms != '0) state <= S_INIT;
        S_INIT: begin
          acc    <= FP_ZERO;
          k      <= '0;
          loaded <= 1'b0;
          state  <= S_FETCH;
        end
        S_FETCH:
          if (in_valid) begin
            rf_x  <= in_data;
            state <= S_LOAD;
          end
        S_LOAD: begin
          rf_c   <= coef_rd;
          k      <= k + 1'b1;
          loaded <= 1'b1;
          state  <= S_CHECK;
        end
        S_CHECK:
          if (loaded) begin
            loaded <= 1'b0;
            state  <= S_COMPUTE;
          end else begin
            acc <= add_y;
            if (k < n_terms) state <= S_LOAD;
            else             state <= S_SAVE;
          end
        S_COMPUTE: begin
          cnt   <= CW'(MUL_LAT - 1);
          state <= S_WAIT_MUL;
        end
        S_WAIT_MUL:
          if (cnt == '0) state <= S_ADD;
          else           cnt   <= cnt - 1'b1;
        S_ADD: begin
          add_a <= mul_y;
          add_b <= rf_c;
          cnt   <= CW'(ADD_LAT - 1);
          state <= S_WAIT_ADD;
        end
        S_WAIT_ADD:
          if (cnt == '0) state <= S_CHECK;
          else           cnt   <= cnt - 1'b1;
        S_SAVE:
          if (out_ready) state <= rf_x.last ? S_IDLE : S_INIT;
        default:
          state <= S_IDLE;
      endcase
    end
  end

  assign in_ready  = (state == S_FETCH);
  assign out_valid = (state == S_SAVE);
  assign out_data  = '{x: rf_x.x, v: acc, last: rf_x.last};
  assign busy      = (state != S_IDLE);

  initial begin
    if (MUL_LAT < 1 || ADD_LAT < 1) $error("tytan_core: MUL_LAT and ADD_LAT must be at least 1");
  end

  // The coefficient buffer is only reprogrammed while the core is idle.
  a_coef_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (coef_wr_en || coef_clear) |-> state == S_IDLE);
  // A result offered downstream stays put until it is taken.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && out_data == $past(out_data));

endmodule
