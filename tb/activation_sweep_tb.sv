// activation_sweep_tb: every activation over [-5, 5] with 10, 20 and 30
// Taylor terms, through the whole engine at its default parameters.
//
// For each term count n and each mode, the cores are reloaded and 21 inputs,
// x = -5, -4.5, ..., 5, are streamed through. Core A holds the n-term series
// of e^x, except for Swish and GELU, where it holds the n-term series of
// sigmoid(x) around 0 (the engine then returns x*T(x) and x*T(1.702x)). In
// Softplus mode core B holds the n-term series of log(1+u) and is fed e^x.
//
// Checks per element: the result equals, bit for bit, the same computation
// done with FP32-rounded reference operations (this holds for every input,
// also where the truncated series is far off or overflows; NaN matches NaN).
// Per mode and n the largest absolute error against the exact activation is
// printed, which shows how the truncated series departs from the function
// towards the ends of the range. Where the series converge well (|x| <= 1;
// x <= -0.5 for Softplus, whose log(1+u) series needs u = e^x < 1), the 30-term
// results must be within 1e-3 of the activation, and no worse than the 10-term
// results.
module activation_sweep_tb;
  import tytan_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned NPTS = 21;

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
  logic [31:0] ca [], cb [];
  real         err_near [7][3];  // largest error in the check range

  always #5 clk = ~clk;

  gnae_top dut (.*);

  initial begin
    repeat (3000000) @(posedge clk);
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

  task automatic load(logic sel, logic [31:0] c []);
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
      MODE_SIGMOID:  return 1.0 / (1.0 + $exp(-x));
      MODE_SWISH:    return x / (1.0 + $exp(-x));
      MODE_GELU:     return x / (1.0 + $exp(-1.702 * x));
      MODE_TANH:     return $tanh(x);
      MODE_SELU:     return (x < 0.0) ? 1.0507009873554805 * 1.6732632423543772 * ($exp(x) - 1.0)
                                      : 1.0507009873554805 * x;
      MODE_SOFTPLUS: return $ln(1.0 + $exp(x));
      default:       return $exp(x);
    endcase
  endfunction

  function automatic bit is_nan(logic [31:0] f);
    return f[30:23] == 8'hFF && f[22:0] != '0;
  endfunction

  // Stream the 21 sweep points in the current mode and check them.
  task automatic sweep(mode_t m, int ni);
    logic [31:0] exp_q [$];
    real         err_all, err_cv;
    err_all = 0.0;
    err_cv  = 0.0;
    mode    = m;
    for (int i = 0; i < int'(NPTS); i++) exp_q.push_back(ref_elem(m, r2f(-5.0 + 0.5 * i)));
    fork
      begin
        for (int i = 0; i < int'(NPTS); i++) begin
          in_valid = 1;
          in_data  = r2f(-5.0 + 0.5 * i);
          in_last  = (i == int'(NPTS) - 1);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          #1;
        end
        in_valid = 0;
        in_last  = 0;
      end
      begin
        int got = 0;
        out_ready = 1;
        while (got < int'(NPTS)) begin
          @(posedge clk); #1;
          if (out_valid) begin
            logic [31:0] e;
            real         xr, d;
            bit          conv;
            e  = exp_q.pop_front();
            xr = -5.0 + 0.5 * got;
            check(out_data == e || (is_nan(out_data) && is_nan(e)),
                  $sformatf("%s n=%0d x=%f: %h expected %h", m.name(), ca.size(), xr, out_data, e));
            check(out_last == (got == int'(NPTS) - 1), "last flag");
            d = f2r(out_data) - act(m, xr);
            if (d < 0.0) d = -d;
            if (is_nan(out_data) || out_data[30:23] == 8'hFF) d = 1.0e30;
            if (d > err_all) err_all = d;
            conv = (m == MODE_SOFTPLUS) ? (xr <= -0.5) : (xr >= -1.0 && xr <= 1.0);
            if (conv && d > err_cv) err_cv = d;
            got++;
          end
        end
      end
    join
    @(posedge clk); #1;
    out_ready = 0;
    @(posedge clk); #1;
    check(!busy && !out_valid, "engine idle after sweep");
    err_near[m][ni] = err_cv;
    $display("%-14s n=%0d: max |error| %10.3e over [-5,5], %10.3e for |x| <= 1 (Softplus: x <= -0.5)",
             m.name(), ca.size(), err_all, err_cv);
  endtask

  initial begin
    int lens [3] = '{10, 20, 30};
    mode = MODE_POLY;
    coef_sel = 0; coef_clear = 0; coef_wr_en = 0; coef_wr_data = 0;
    in_valid = 0; in_data = 0; in_last = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    foreach (lens[ni]) begin
      int n;
      n = lens[ni];
      log1p_coefs(cb, n);
      load(1'b1, cb);
      exp_coefs(ca, n);
      load(1'b0, ca);
      for (int m = 0; m < 7; m++) begin
        if (mode_t'(m) == MODE_SWISH) begin
          sigmoid_coefs(ca, n);
          load(1'b0, ca);
        end
        sweep(mode_t'(m), ni);
        if (mode_t'(m) == MODE_GELU) begin
          exp_coefs(ca, n);
          load(1'b0, ca);
        end
      end
    end

    for (int m = 0; m < 7; m++) begin
      mode = mode_t'(m);
      check(err_near[m][2] < 1e-3, $sformatf("%s: 30-term error %e", mode.name(), err_near[m][2]));
      check(err_near[m][2] <= err_near[m][0], $sformatf("%s: 30 terms no better than 10", mode.name()));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
