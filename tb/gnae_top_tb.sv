// gnae_top_tb: end-to-end test of the activation engine at its default size.
//
// Core A is loaded with the 30-term Taylor series of e^x and core B with the
// 30-term series of log(1+u). Then, for each of the seven modes, a batch of
// inputs in [-5, 5] (narrower where the series needs it) is written into the
// input buffer while results are read from the output buffer. Every result is
// compared bit for bit with a reference built from double-precision operations
// rounded to FP32 (pre-scale, Horner steps, add-on), and, where the loaded
// series approximates the activation, with the activation itself
// (POLY: e^x, sigmoid, tanh, SELU, Softplus).
//
// Mechanisms that must each occur at least once, counted and reported:
// input buffer full (writer stalled), output buffer full (chain stalled behind
// a reader that stops), mode switches, core B in use (Softplus chain), both
// SELU multiplexer inputs, the core's "next cycle" and "finish" transitions,
// reprogramming the coefficient buffer.
//
// Cycle counts for the tanh case with 30 coefficients, in the spirit of the
// paper's latency table: one element from leaving the input buffer to entering
// the output buffer must take 747 cycles; a batch of 30 elements, from the
// first leaving the input buffer to the last entering the output buffer,
// 747 + 29*723 cycles, because the core (723 cycles per element) overlaps
// with the add-on stages; filling the input buffer with 30 values takes
// 30 cycles.
module gnae_top_tb;
  import tytan_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned N = 30;  // coefficients used, = default N_MAX
  localparam int unsigned CORE_CYC = 3 + N * (5 + 10 + 9);

  logic        clk = 1'b0, rst_n = 1'b0;
  mode_t       mode;
  logic        coef_sel, coef_clear, coef_wr_en;
  fp32_t       coef_wr_data;
  logic [4:0]  n_terms_a, n_terms_b;
  logic        in_valid, in_ready, in_last;
  fp32_t       in_data;
  logic        out_valid, out_ready, out_last;
  fp32_t       out_data;
  logic [4:0]  in_count, out_count;
  logic        busy;

  int          checks = 0, failures = 0;
  longint      cyc = 0;
  logic [31:0] ca [], cb [];
  logic [31:0] exp_q [$];
  logic        last_q [$];
  real         x_q [$];

  // mechanism counters
  int in_full = 0, out_full = 0, mode_switches = 0, core_b_used = 0;
  int selu_neg = 0, selu_pos = 0, next_cycle = 0, finish = 0, reprogram = 0;
  // event times
  longint first_pop, last_push, w1, w30;
  int     pops = 0, pushes = 0;

  always #5 clk = ~clk;

  gnae_top dut (.*);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (in_valid && !in_ready) in_full++;
      if (out_count == 5'd30) out_full++;
      if (dut.g_addons.u_core_b.in_valid && dut.g_addons.u_core_b.in_ready) core_b_used++;
      if (dut.g_addons.u_core_a.out_valid && dut.g_addons.u_core_a.out_ready) begin
        if (dut.g_addons.u_core_a.out_data.last) finish++;
        else                            next_cycle++;
      end
      if (dut.ib_valid && dut.ib_ready) begin
        if (pops == 0) first_pop = cyc;
        pops++;
      end
      if (dut.po_valid && dut.po_ready) begin
        last_push = cyc;
        pushes++;
      end
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  task automatic load_coefs(logic sel, logic [31:0] c []);
    coef_sel   = sel;
    coef_clear = 1;
    @(posedge clk); #1;
    coef_clear = 0;
    foreach (c[i]) begin
      coef_wr_en   = 1;
      coef_wr_data = c[i];
      @(posedge clk); #1;
    end
    coef_wr_en = 0;
    check((sel ? n_terms_b : n_terms_a) == 5'(c.size()), "coefficient count");
    reprogram++;
  endtask

  function automatic logic [31:0] ref_elem(mode_t m, logic [31:0] x);
    logic [31:0] v, t, one, mone;
    one  = r2f(1.0);
    mone = r2f(-1.0);
    v = (m == MODE_TANH) ? fp_mul_ref(x, r2f(2.0))
      : (m == MODE_GELU) ? fp_mul_ref(x, r2f(1.702))
      : fp_mul_ref(x, one);
    t = poly_ref(ca, ca.size(), v);
    if (m == MODE_SOFTPLUS) t = poly_ref(cb, cb.size(), t);
    case (m)
      MODE_SIGMOID: return fp_div_ref(t, fp_add_ref(t, one));
      MODE_SWISH, MODE_GELU: return fp_mul_ref(x, t);
      MODE_TANH:    return fp_div_ref(fp_add_ref(t, mone), fp_add_ref(t, one));
      MODE_SELU:    return (f2r(x) < 0.0) ? fp_mul_ref(r2f(1.0507009873554805 * 1.6732632423543772),
                                                       fp_add_ref(t, mone))
                                          : fp_mul_ref(r2f(1.0507009873554805), x);
      default:      return t;
    endcase
  endfunction

  function automatic real act(mode_t m, real x);
    case (m)
      MODE_POLY:     return $exp(x);
      MODE_SIGMOID:  return 1.0 / (1.0 + $exp(-x));
      MODE_TANH:     return $tanh(x);
      MODE_SELU:     return (x < 0.0) ? 1.0507009873554805 * 1.6732632423543772 * ($exp(x) - 1.0)
                                      : 1.0507009873554805 * x;
      MODE_SOFTPLUS: return $ln(1.0 + $exp(x));
      default:       return 0.0;
    endcase
  endfunction

  // Write n inputs drawn from [lo, hi] and read all results back.
  // hold_out: keep out_ready low until the output buffer is full.
  task automatic run_batch(mode_t m, int n, real lo, real hi, bit hold_out, bit tol);
    if (m != mode) mode_switches++;
    mode = m;
    fork
      begin : producer
        for (int i = 0; i < n; i++) begin
          real         xr;
          logic [31:0] x;
          xr = lo + (hi - lo) * real'($urandom_range(10000)) / 10000.0;
          x  = r2f(xr);
          if (m == MODE_SELU) begin
            if (xr < 0.0) selu_neg++;
            else          selu_pos++;
          end
          exp_q.push_back(ref_elem(m, x));
          last_q.push_back(i == n - 1);
          x_q.push_back(f2r(x));
          in_valid = 1;
          in_data  = x;
          in_last  = (i == n - 1);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          if (i == 0)  w1  = cyc;
          if (i == 29) w30 = cyc;
          #1;
        end
        in_valid = 0;
        in_last  = 0;
      end
      begin : consumer
        int got = 0;
        out_ready = !hold_out;
        while (got < n) begin
          @(posedge clk); #1;
          if (hold_out && out_count == 5'd30) out_ready = 1;
          if (out_valid && out_ready) begin
            logic [31:0] e;
            real         xr, a;
            e  = exp_q.pop_front();
            xr = x_q.pop_front();
            check(out_data == e, $sformatf("mode %s x=%f: %h expected %h", m.name(), xr, out_data, e));
            check(out_last == last_q.pop_front(), "last flag");
            if (tol) begin
              a = act(m, xr);
              check((f2r(out_data) - a) < 1e-2 * (a < 0 ? -a : a) + 2e-3
                    && (a - f2r(out_data)) < 1e-2 * (a < 0 ? -a : a) + 2e-3,
                    $sformatf("mode %s x=%f: %f vs %f", m.name(), xr, f2r(out_data), a));
            end
            got++;
          end
        end
      end
    join
    // let the handshake of the last read complete, then the engine is idle
    @(posedge clk); #1;
    out_ready = 0;
    @(posedge clk); #1;
    check(!busy && !out_valid, "engine idle after batch");
  endtask

  initial begin
    mode = MODE_POLY;
    coef_sel = 0; coef_clear = 0; coef_wr_en = 0; coef_wr_data = 0;
    in_valid = 0; in_data = 0; in_last = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    exp_coefs(ca, N);
    log1p_coefs(cb, N);
    load_coefs(1'b0, ca);
    load_coefs(1'b1, cb);

    // one element per mode: end-to-end latency from leaving the input buffer
    // to entering the output buffer
    for (int m = 0; m < 7; m++) begin
      int post;
      case (mode_t'(m))
        MODE_SIGMOID, MODE_TANH: post = 1 + 9 + 3;
        MODE_SELU:               post = 1 + 9 + 10;
        MODE_SWISH, MODE_GELU:   post = 1 + 10;
        MODE_SOFTPLUS:           post = CORE_CYC + 1;
        default:                 post = 1;
      endcase
      pops = 0; pushes = 0;
      run_batch(mode_t'(m), 1, (mode_t'(m) == MODE_SOFTPLUS) ? -3.0 : -2.5,
                (mode_t'(m) == MODE_SOFTPLUS) ? -0.5 : 2.5, 1'b0,
                mode_t'(m) != MODE_SWISH && mode_t'(m) != MODE_GELU);
      $display("%s, %0d coefficients: one element %0d cycles", mode.name(), N, last_push - first_pop);
      check(last_push - first_pop == 11 + CORE_CYC + post, $sformatf("single-element latency, mode %0d", m));
      if (mode_t'(m) == MODE_TANH) check(last_push - first_pop == 747, "single-element tanh latency 747");
    end

    // tanh, full batch of 30 inputs
    begin
      pops = 0; pushes = 0;
      run_batch(MODE_TANH, 30, -2.5, 2.5, 1'b0, 1'b1);
      $display("tanh, 30 inputs: first pop to last push %0d cycles", last_push - first_pop);
      check(last_push - first_pop == 747 + 29 * CORE_CYC, "30-element tanh batch time");
      check(pushes == 30, "30 results");
    end

    // sigmoid with more inputs than the buffer holds and a reader that waits
    // until the output buffer is full; the first 30 writes take 30 cycles
    run_batch(MODE_SIGMOID, 34, -5.0, 5.0, 1'b1, 1'b1);
    $display("fill: 30 input values written in %0d cycles", w30 - w1 + 1);
    check(w30 - w1 + 1 == 30, "input buffer fill time");

    run_batch(MODE_SWISH,    12, -5.0, 5.0, 1'b0, 1'b0);
    run_batch(MODE_GELU,     12, -5.0, 5.0, 1'b0, 1'b0);
    run_batch(MODE_SELU,     16, -5.0, 5.0, 1'b0, 1'b1);
    run_batch(MODE_SOFTPLUS,  8, -5.0, -0.5, 1'b0, 1'b1);
    run_batch(MODE_POLY,      8, -5.0, 5.0, 1'b0, 1'b1);

    // fewer terms: reprogram core A with 10 coefficients, tanh again
    exp_coefs(ca, 10);
    load_coefs(1'b0, ca);
    run_batch(MODE_TANH, 6, -0.5, 0.5, 1'b0, 1'b1);

    $display("mechanisms: in_full=%0d out_full=%0d mode_switches=%0d core_b=%0d selu_neg=%0d selu_pos=%0d next_cycle=%0d finish=%0d reprogram=%0d",
             in_full, out_full, mode_switches, core_b_used, selu_neg, selu_pos, next_cycle, finish, reprogram);
    check(in_full > 0,       "input buffer never full");
    check(out_full > 0,      "output buffer never full");
    check(mode_switches > 0, "no mode switch");
    check(core_b_used > 0,   "core B never used");
    check(selu_neg > 0,      "SELU TYTAN branch never used");
    check(selu_pos > 0,      "SELU linear branch never used");
    check(next_cycle > 0,    "no next-cycle transition");
    check(finish > 0,        "no finish transition");
    check(reprogram > 2,     "no reprogramming");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
