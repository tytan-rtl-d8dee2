// tytan_base_tb: the bare accelerator, gnae_top with WITH_ADDONS = 0.
//
// This is the smaller of the two configurations: input buffer, one TYTAN core
// and output buffer, with no prescale, no second core and no post stage. All
// other parameters stay at their defaults (30-entry buffers, 30 coefficients,
// 10-cycle multiplier, 9-cycle adder).
//
// The core is loaded with the 30-term Taylor series of e^x. Results are
// compared bit for bit with Horner's rule done in double precision and rounded
// to FP32 after every operation, and with e^x itself (relative error 1e-3).
//
// Cycle counts: the core spends 3 + 30*24 = 723 cycles per element, but it
// takes an element only in its FETCH state, after IDLE and INIT, and those two
// cycles pass while the element still waits at the head of the input buffer.
// So one element leaves the input buffer and enters the output buffer
// 721 cycles later, and a batch of 30 takes 721 + 29*723 cycles from the first
// leaving to the last entering. A batch of 34 with a reader that waits until
// the output buffer holds 30 results must stall both the writer (input buffer
// full) and the core (output buffer full); both events are counted and must
// occur.
// n_terms_b must read 0, since there is no second core.
module tytan_base_tb;
  import tytan_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned N = 30;
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
  logic [31:0] ca [];
  logic [31:0] exp_q [$];
  logic        last_q [$];
  real         x_q [$];
  int          in_full = 0, out_full = 0;
  longint      first_pop, last_push;
  int          pops = 0, pushes = 0;

  always #5 clk = ~clk;

  gnae_top #(.WITH_ADDONS(1'b0)) dut (.*);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (in_valid && !in_ready) in_full++;
      if (out_count == 5'd30) out_full++;
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
    repeat (200000) @(posedge clk);
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

  task automatic run_batch(int n, bit hold_out);
    fork
      begin
        for (int i = 0; i < n; i++) begin
          logic [31:0] x;
          x = r2f(-5.0 + 10.0 * real'($urandom_range(10000)) / 10000.0);
          exp_q.push_back(poly_ref(ca, N, x));
          last_q.push_back(i == n - 1);
          x_q.push_back(f2r(x));
          in_valid = 1;
          in_data  = x;
          in_last  = (i == n - 1);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          #1;
        end
        in_valid = 0;
        in_last  = 0;
      end
      begin
        int got = 0;
        out_ready = !hold_out;
        while (got < n) begin
          @(posedge clk); #1;
          if (hold_out && out_count == 5'd30) out_ready = 1;
          if (out_valid && out_ready) begin
            logic [31:0] e;
            real         xr, a, d;
            e  = exp_q.pop_front();
            xr = x_q.pop_front();
            check(out_data == e, $sformatf("x=%f: %h expected %h", xr, out_data, e));
            check(out_last == last_q.pop_front(), "last flag");
            a = $exp(xr);
            d = f2r(out_data) - a;
            check(d < 1e-3 * a && -d < 1e-3 * a, $sformatf("x=%f: %f vs e^x %f", xr, f2r(out_data), a));
            got++;
          end
        end
      end
    join
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
    coef_clear = 1;
    @(posedge clk); #1;
    coef_clear = 0;
    foreach (ca[i]) begin
      coef_wr_en   = 1;
      coef_wr_data = ca[i];
      @(posedge clk); #1;
    end
    coef_wr_en = 0;
    check(n_terms_a == 5'(N), "core loaded with 30 coefficients");
    check(n_terms_b == 5'd0, "no second core");

    pops = 0; pushes = 0;
    run_batch(1, 1'b0);
    $display("bare core, %0d coefficients: one element %0d cycles", N, last_push - first_pop);
    check(last_push - first_pop == 64'(CORE_CYC - 2), "single-element latency 721");

    pops = 0; pushes = 0;
    run_batch(30, 1'b0);
    $display("bare core, 30 inputs: first pop to last push %0d cycles", last_push - first_pop);
    check(last_push - first_pop == 64'(CORE_CYC - 2 + 29 * CORE_CYC), "30-element batch time");
    check(pushes == 30, "30 results");

    run_batch(34, 1'b1);

    $display("input buffer full: %0d cycles, output buffer full: %0d cycles", in_full, out_full);
    check(in_full > 0, "input buffer full occurred");
    check(out_full > 0, "output buffer full occurred");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
