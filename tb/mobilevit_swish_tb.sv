// mobilevit_swish_tb: Swish layers with per-layer Taylor lengths.
//
// Models the layer-wise use of the engine in the MobileViT study: each Swish
// layer gets its own number of Taylor terms, chosen by an accuracy search;
// the study reports lengths from 7 to 25 terms (minimum 7, maxima 9, 19
// and 25). For each of those lengths core A is reloaded with the series of
// sigmoid(x) around 0, and a batch of activations is streamed in MODE_SWISH,
// so the engine returns x * T(x).
//
// The sigmoid series (tb_fp_pkg) comes from 1 / (1 + e^-x) by power-series
// division: with a0 = 2 and a_k = (-1)^k / k!, b0 = 1/2 and
// b_m = -(1/2) * sum_{k=1..m} a_k b_{m-k}. Checks per element: bit-exact
// against the FP32 reference and within 1e-2 of x*sigmoid(x). Inputs stay
// inside the series' radius of convergence (pi): |x| <= 1 for the short
// series, |x| <= 2 for 19 and 25 terms. The steady-state rate is checked too:
// consecutive results enter the output buffer 3 + 24n cycles apart.
module mobilevit_swish_tb;
  import tytan_pkg::*;
  import tb_fp_pkg::*;

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
  longint      cyc = 0, prev_push;
  int          pushes = 0, gap_expected = 0;

  always #5 clk = ~clk;

  gnae_top dut (.*);

  initial begin
    repeat (1000000) @(posedge clk);
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

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && dut.po_valid && dut.po_ready) begin
      if (pushes > 0) check(cyc - prev_push == longint'(gap_expected),
                            $sformatf("result spacing %0d, expected %0d", cyc - prev_push, gap_expected));
      prev_push = cyc;
      pushes++;
    end
  end

  initial begin
    int          lens [4] = '{7, 9, 19, 25};
    logic [31:0] c [];
    mode = MODE_SWISH;
    coef_sel = 0; coef_clear = 0; coef_wr_en = 0; coef_wr_data = 0;
    in_valid = 0; in_data = 0; in_last = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    foreach (lens[l]) begin
      int   n, nel;
      real  lim;
      n   = lens[l];
      nel = 10;
      lim = (n >= 19) ? 2.0 : 1.0;
      sigmoid_coefs(c, n);
      coef_clear = 1;
      @(posedge clk); #1;
      coef_clear = 0;
      foreach (c[i]) begin
        coef_wr_en = 1; coef_wr_data = c[i];
        @(posedge clk); #1;
      end
      coef_wr_en = 0;
      check(n_terms_a == 5'(n), "terms loaded");
      pushes = 0;
      gap_expected = 3 + n * 24;
      fork
        begin
          for (int pi = 0; pi < nel; pi++) begin
            in_valid = 1;
            in_data  = r2f(-lim + 2.0 * lim * real'(pi) / real'(nel - 1));
            in_last  = (pi == nel - 1);
            @(posedge clk);
            while (!in_ready) @(posedge clk);
            #1;
          end
          in_valid = 0;
          in_last  = 0;
        end
        for (int ci = 0; ci < nel; ci++) begin
          logic [31:0] x, e;
          real         xr, sw;
          x = r2f(-lim + 2.0 * lim * real'(ci) / real'(nel - 1));
          @(posedge clk);
          while (!out_valid) @(posedge clk);
          e  = fp_mul_ref(x, poly_ref(c, n, fp_mul_ref(x, r2f(1.0))));
          xr = f2r(x);
          sw = xr / (1.0 + $exp(-xr));
          check(out_data == e, $sformatf("n=%0d x=%f: %h expected %h", n, xr, out_data, e));
          check(f2r(out_data) - sw < 1e-2 && sw - f2r(out_data) < 1e-2,
                $sformatf("n=%0d x=%f: %f vs swish %f", n, xr, f2r(out_data), sw));
          #1;
        end
      join
      in_valid = 0;
      in_last  = 0;
      @(posedge clk); #1;
      check(pushes == nel, "all results of the layer");
      $display("layer with %0d terms: %0d elements, %0d cycles apart", n, nel, gap_expected);
      while (busy) begin @(posedge clk); #1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
