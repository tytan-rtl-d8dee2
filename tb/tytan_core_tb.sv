// tytan_core_tb: self-checking test of one TYTAN core at its default size.
//
// Programs the coefficient buffer with (1) the 30-term Taylor series of e^x,
// (2) a 10-term e^x series, (3) a single coefficient and (4) 30 random
// coefficients, then streams inputs in [-5, 5] through the core. Every result
// is compared bit for bit with a Horner evaluation done in double precision
// and rounded to FP32 after each step, and, for the 30-term e^x case, with
// exp(x) itself within a relative tolerance. The cycle count from taking an
// element (FETCH) to offering its result (SAVE) must be 1 + n*(5 + MUL_LAT +
// ADD_LAT), i.e. the per-element time 3 + n*24 less INIT and FETCH. The output
// is also held back for random periods (the result must wait in SAVE) and
// the core must return to idle after an element flagged last.
module tytan_core_tb;
  import tytan_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned N_MAX = 30, MUL_LAT = 10, ADD_LAT = 9;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        coef_clear, coef_wr_en, coef_full, busy;
  fp32_t       coef_wr_data;
  logic [4:0]  n_terms;
  logic        in_valid, in_ready, out_valid, out_ready;
  elem_t       in_data, out_data;
  int          checks = 0, failures = 0, stalls = 0;
  longint      cyc = 0, t_in;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  tytan_core dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
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

  task automatic load_coefs(logic [31:0] c []);
    coef_clear = 1;
    @(posedge clk); #1;
    coef_clear = 0;
    foreach (c[i]) begin
      coef_wr_en   = 1;
      coef_wr_data = c[i];
      @(posedge clk); #1;
    end
    coef_wr_en = 0;
    check(n_terms == 5'(c.size()), "n_terms");
  endtask

  // Send one element and wait for its result.
  task automatic run_one(logic [31:0] c [], logic [31:0] x, logic last, bit stall, bit exp_check);
    logic [31:0] exp;
    int          lat;
    in_valid = 1;
    in_data  = '{x: x, v: x, last: last};
    while (!in_ready) begin @(posedge clk); #1; end
    t_in = cyc;
    @(posedge clk); #1;
    in_valid = 0;
    out_ready = !stall;
    while (!out_valid) begin @(posedge clk); #1; end
    lat = int'(cyc - t_in);
    check(lat == 1 + c.size() * (5 + MUL_LAT + ADD_LAT),
          $sformatf("latency %0d for n=%0d", lat, c.size()));
    if (stall) begin
      stalls++;
      repeat ($urandom_range(5, 1)) begin @(posedge clk); #1; end
      check(out_valid, "result held while stalled");
      out_ready = 1;
    end
    exp = poly_ref(c, c.size(), x);
    check(out_data.v == exp, $sformatf("T(%h) = %h expected %h", x, out_data.v, exp));
    check(out_data.x == x && out_data.last == last, "side band");
    if (exp_check) begin
      real r, e;
      r = f2r(out_data.v);
      e = $exp(f2r(x));
      check((r - e) < 1e-3 * e + 1e-4 && (e - r) < 1e-3 * e + 1e-4,
            $sformatf("exp(%f): %f vs %f", f2r(x), r, e));
    end
    @(posedge clk); #1;
    out_ready = 0;
    if (last) check(!busy, "idle after last element");
    else      check(busy, "next element cycle after a non-last element");
  endtask

  initial begin
    logic [31:0] c [];
    logic [31:0] x;
    coef_clear = 0; coef_wr_en = 0; coef_wr_data = 0;
    in_valid = 0; in_data = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    exp_coefs(c, 30);
    load_coefs(c);
    for (int i = 0; i < 8; i++) begin
      x = r2f(-5.0 + 10.0 * real'($urandom_range(1000)) / 1000.0);
      run_one(c, x, i == 7, i % 3 == 1, 1'b1);
    end
    run_one(c, 32'h0, 1'b1, 1'b0, 1'b1);  // e^0 = 1 exactly

    exp_coefs(c, 10);
    load_coefs(c);
    for (int i = 0; i < 4; i++) run_one(c, r2f(real'(i) - 1.5), i == 3, 1'b0, 1'b0);

    c = new[1];
    c[0] = 32'h40490FDB;  // pi: T(x) = c0 for every x
    load_coefs(c);
    run_one(c, r2f(3.25), 1'b1, 1'b0, 1'b0);

    c = new[30];
    foreach (c[i]) c[i] = rand_fp(110, 130);
    load_coefs(c);
    for (int i = 0; i < 4; i++) run_one(c, rand_fp(120, 128), i == 3, i == 2, 1'b0);

    check(stalls > 0, "no output stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
