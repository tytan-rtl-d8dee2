// gnae_top: the hardware side of the generalized non-linear approximation
// engine: input buffer, input add-on, two TYTAN cores, output add-ons and
// output buffer.
//
// Elements (FP32 activations, in_data, one per handshake) are written into the
// input buffer. The engine then takes them one at a time through
//   input buffer -> tytan_prescale (x2 / x1.702 / x1 by mode)
//                -> core A (polynomial T_a)
//                -> core B (polynomial T_b, only in MODE_SOFTPLUS)
//                -> tytan_post (sigmoid / swish / GELU / tanh / SELU add-ons)
//                -> output buffer -> out_data
// Each stage holds one element and passes it on with a valid/ready handshake,
// so the stages work on consecutive elements at the same time; the TYTAN core
// is by far the slowest stage and sets the rate. When a buffer is full its
// writer stalls; when the reader stops taking results, the output buffer fills
// and the whole chain stalls behind it.
//
// Core B sits behind core A only in Softplus mode; in every other mode it is
// bypassed (stays idle). The paper's Softplus is log(1 + e^x) built from two
// TYTAN units in series, one programmed with an e^x series and one with a log
// series; since both cores are programmable, which series goes into which core
// is up to the coefficients loaded.
//
// Coefficients are written through a dedicated port: coef_sel picks the core
// (0 = A, 1 = B), coef_clear empties its buffer, each coef_wr_en appends one
// coefficient, highest order first. The port and the mode may only be changed
// while the engine is idle (busy low).
//
// Timing at the default parameters, n coefficients, one element, nothing
// stalled: the core takes 3 + n*(5 + MUL_LAT + ADD_LAT) cycles (723 for
// n = 30), the add-ons add their latencies (see tytan_prescale, tytan_post);
// a tanh element with 30 coefficients leaves the input buffer and enters the
// output buffer 747 cycles later.
//
// WITH_ADDONS selects between the two configurations the paper sizes: 1 (the
// default) is the full engine above; 0 is the bare TYTAN accelerator, input
// buffer -> core A -> output buffer, which evaluates the loaded polynomial
// only (MODE_POLY), has no core B (n_terms_b reads 0, coef_sel must be 0) and
// no prescale or post stage, so a result takes just the core's cycles.
module gnae_top
  import tytan_pkg::*;
#(
  parameter int unsigned BUF_DEPTH = 30,  // input and output buffer entries
  parameter int unsigned N_MAX     = 30,  // coefficients per core
  parameter int unsigned MUL_LAT   = 10,  // FP32 multiplier latency (cycles)
  parameter int unsigned ADD_LAT   = 9,   // FP32 adder latency (cycles)
  parameter int unsigned DIV_LAT   = 3,   // FP32 divider latency (cycles)
  parameter bit          WITH_ADDONS = 1'b1 // 0: bare core, MODE_POLY only
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  mode_t                          mode,
  // coefficient port
  input  logic                           coef_sel,
  input  logic                           coef_clear,
  input  logic                           coef_wr_en,
  input  fp32_t                          coef_wr_data,
  output logic [$clog2(N_MAX+1)-1:0]     n_terms_a,
  output logic [$clog2(N_MAX+1)-1:0]     n_terms_b,
  // input elements
  input  logic                           in_valid,
  output logic                           in_ready,
  input  fp32_t                          in_data,
  input  logic                           in_last,
  // results
  output logic                           out_valid,
  input  logic                           out_ready,
  output fp32_t                          out_data,
  output logic                           out_last,
  // status
  output logic [$clog2(BUF_DEPTH+1)-1:0] in_count,
  output logic [$clog2(BUF_DEPTH+1)-1:0] out_count,
  output logic                           busy
);

  typedef struct packed {
    fp32_t v;
    logic  last;
  } result_t;

  elem_t   ib_out, po_out;
  logic    ib_valid, ib_ready;
  logic    front_busy, ca_busy, cb_busy;
  logic    po_in_ready, po_valid, po_ready;
  logic    a_full, b_full;
  result_t ob_in, ob_out;

  tytan_fifo #(.T(elem_t), .DEPTH(BUF_DEPTH)) u_in_buf (
    .clk, .rst_n,
    .in_valid  (in_valid),
    .in_ready  (in_ready),
    .in_data   ('{x: in_data, v: in_data, last: in_last}),
    .out_valid (ib_valid),
    .out_ready (ib_ready),
    .out_data  (ib_out),
    .count     (in_count)
  );

  generate
    if (WITH_ADDONS) begin : g_addons
      elem_t ps_out, ca_out, cb_out, po_in;
      logic  ps_valid, ps_ready, ca_valid, ca_ready, ca_in_ready;
      logic  cb_in_valid, cb_in_ready, cb_valid, cb_ready;
      logic  po_in_valid;
      logic  softplus;

      assign softplus = (mode == MODE_SOFTPLUS);

      tytan_prescale #(.MUL_LAT(MUL_LAT)) u_pre (
        .clk, .rst_n, .mode,
        .in_valid  (ib_valid),
        .in_ready  (ib_ready),
        .in_data   (ib_out),
        .out_valid (ps_valid),
        .out_ready (ps_ready),
        .out_data  (ps_out)
      );

      tytan_core #(.N_MAX(N_MAX), .MUL_LAT(MUL_LAT), .ADD_LAT(ADD_LAT)) u_core_a (
        .clk, .rst_n,
        .coef_clear   (coef_clear && !coef_sel),
        .coef_wr_en   (coef_wr_en && !coef_sel),
        .coef_wr_data (coef_wr_data),
        .n_terms      (n_terms_a),
        .coef_full    (a_full),
        .in_valid     (ps_valid),
        .in_ready     (ca_in_ready),
        .in_data      (ps_out),
        .out_valid    (ca_valid),
        .out_ready    (ca_ready),
        .out_data     (ca_out),
        .busy         (ca_busy)
      );
      assign ps_ready = ca_in_ready;
      assign front_busy = !ib_ready || ps_valid;

      // Core B follows core A in Softplus mode only.
      assign cb_in_valid = softplus && ca_valid;
      assign ca_ready    = softplus ? cb_in_ready : po_in_ready;

      tytan_core #(.N_MAX(N_MAX), .MUL_LAT(MUL_LAT), .ADD_LAT(ADD_LAT)) u_core_b (
        .clk, .rst_n,
        .coef_clear   (coef_clear && coef_sel),
        .coef_wr_en   (coef_wr_en && coef_sel),
        .coef_wr_data (coef_wr_data),
        .n_terms      (n_terms_b),
        .coef_full    (b_full),
        .in_valid     (cb_in_valid),
        .in_ready     (cb_in_ready),
        .in_data      (ca_out),
        .out_valid    (cb_valid),
        .out_ready    (cb_ready),
        .out_data     (cb_out),
        .busy         (cb_busy)
      );

      assign po_in_valid = softplus ? cb_valid : ca_valid;
      assign po_in       = softplus ? cb_out   : ca_out;
      assign cb_ready    = softplus && po_in_ready;

      tytan_post #(.MUL_LAT(MUL_LAT), .ADD_LAT(ADD_LAT), .DIV_LAT(DIV_LAT)) u_post (
        .clk, .rst_n, .mode,
        .in_valid  (po_in_valid),
        .in_ready  (po_in_ready),
        .in_data   (po_in),
        .out_valid (po_valid),
        .out_ready (po_ready),
        .out_data  (po_out)
      );
    end else begin : g_base
      // Bare accelerator: core A reads the input buffer and writes the
      // output buffer directly.
      tytan_core #(.N_MAX(N_MAX), .MUL_LAT(MUL_LAT), .ADD_LAT(ADD_LAT)) u_core_a (
        .clk, .rst_n,
        .coef_clear   (coef_clear && !coef_sel),
        .coef_wr_en   (coef_wr_en && !coef_sel),
        .coef_wr_data (coef_wr_data),
        .n_terms      (n_terms_a),
        .coef_full    (a_full),
        .in_valid     (ib_valid),
        .in_ready     (ib_ready),
        .in_data      (ib_out),
        .out_valid    (po_valid),
        .out_ready    (po_ready),
        .out_data     (po_out),
        .busy         (ca_busy)
      );
      assign n_terms_b   = '0;
      assign b_full      = 1'b1;
      assign front_busy  = 1'b0;
      assign cb_busy     = 1'b0;
      assign po_in_ready = 1'b1;

      // Without the add-ons only the plain polynomial mode and core A exist.
      a_base_mode: assert property (@(posedge clk) disable iff (!rst_n)
        mode == MODE_POLY && !(coef_wr_en && coef_sel));
    end
  endgenerate

  assign ob_in = '{v: po_out.v, last: po_out.last};

  tytan_fifo #(.T(result_t), .DEPTH(BUF_DEPTH)) u_out_buf (
    .clk, .rst_n,
    .in_valid  (po_valid),
    .in_ready  (po_ready),
    .in_data   (ob_in),
    .out_valid (out_valid),
    .out_ready (out_ready),
    .out_data  (ob_out),
    .count     (out_count)
  );

  assign out_data = ob_out.v;
  assign out_last = ob_out.last;

  assign busy = ib_valid || front_busy || ca_busy || cb_busy
             || !po_in_ready || po_valid;

  // Mode is a configuration input: it must not change while elements are in
  // flight between the buffers.
  a_mode_stable: assert property (@(posedge clk) disable iff (!rst_n)
    busy |=> mode == $past(mode));

  // The coefficient buffers are full-only flags; a write beyond N_MAX is dropped.
  a_no_coef_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    coef_wr_en |-> !(coef_sel ? b_full : a_full));

endmodule
