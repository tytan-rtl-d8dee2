// tytan_prescale_tb: self-checking test of the input-side add-on.
//
// In every mode, random inputs are sent with random gaps and random
// back-pressure; each output must carry x unchanged and v = x * 2 (tanh),
// x * 1.702 (GELU) or x (all others), bit for bit against the double-precision
// reference. The time from taking an element to offering it must be
// MUL_LAT + 1 cycles.
module tytan_prescale_tb;
  import tytan_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned MUL_LAT = 10;

  logic  clk = 1'b0, rst_n = 1'b0;
  mode_t mode;
  logic  in_valid, in_ready, out_valid, out_ready;
  elem_t in_data, out_data;
  int    checks = 0, failures = 0;
  longint cyc = 0, t_in;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  tytan_prescale dut (.*);

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

  initial begin
    logic [31:0] x, k, exp;
    logic        ready0;
    in_valid = 0; in_data = '0; out_ready = 0; mode = MODE_POLY;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int m = 0; m < 7; m++) begin
      mode = mode_t'(m);
      k = (mode == MODE_TANH) ? FP_TWO : (mode == MODE_GELU) ? r2f(1.702) : r2f(1.0);
      for (int i = 0; i < 40; i++) begin
        x = rand_fp(100, 150);
        repeat ($urandom_range(2)) begin @(posedge clk); #1; end
        in_valid = 1;
        in_data  = '{x: x, v: x, last: 1'($urandom)};
        while (!in_ready) begin @(posedge clk); #1; end
        t_in = cyc;
        @(posedge clk); #1;
        in_valid  = 0;
        out_ready = ($urandom_range(3) != 0);
        ready0    = out_ready;
        while (!(out_valid && out_ready)) begin
          @(posedge clk); #1;
          out_ready = 1;
        end
        if (ready0) check(int'(cyc - t_in) == MUL_LAT + 1, $sformatf("latency %0d", cyc - t_in));
        else        check(int'(cyc - t_in) >= MUL_LAT + 1, "latency under back-pressure");
        exp = fp_mul_ref(x, k);
        check(out_data.v == exp && out_data.x == x && out_data.last == in_data.last,
              $sformatf("mode %0d x=%h v=%h expected %h", m, x, out_data.v, exp));
        @(posedge clk); #1;
        out_ready = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
