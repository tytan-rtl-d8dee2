// tytan_post_tb: self-checking test of the output-side add-ons.
//
// For every mode, random pairs (x, T) are sent through the stage and the
// result compared bit for bit with the add-on formula evaluated with the
// double-precision reference (each operation rounded to FP32):
// sigmoid T/(T+1), swish and GELU x*T, tanh (T-1)/(T+1), SELU
// x<0 ? lambda*alpha*(T-1) : lambda*x, POLY and Softplus T. SELU is driven with
// both signs of x so both multiplexer inputs are used. The latency of each
// mode is checked: ADD_LAT + DIV_LAT (sigmoid, tanh), ADD_LAT + MUL_LAT (SELU),
// MUL_LAT (swish, GELU), 0 (POLY, Softplus), plus the cycle that takes the
// element.
module tytan_post_tb;
  import tytan_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned MUL_LAT = 10, ADD_LAT = 9, DIV_LAT = 3;

  logic  clk = 1'b0, rst_n = 1'b0;
  mode_t mode;
  logic  in_valid, in_ready, out_valid, out_ready;
  elem_t in_data, out_data;
  int    checks = 0, failures = 0, selu_neg = 0, selu_pos = 0;
  longint cyc = 0, t_in;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  tytan_post #(.MUL_LAT(MUL_LAT), .ADD_LAT(ADD_LAT), .DIV_LAT(DIV_LAT)) dut (.*);

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

  function automatic logic [31:0] ref_post(mode_t m, logic [31:0] x, logic [31:0] t);
    logic [31:0] one, mone;
    one  = r2f(1.0);
    mone = r2f(-1.0);
    case (m)
      MODE_SIGMOID: return fp_div_ref(t, fp_add_ref(t, one));
      MODE_SWISH,
      MODE_GELU:    return fp_mul_ref(x, t);
      MODE_TANH:    return fp_div_ref(fp_add_ref(t, mone), fp_add_ref(t, one));
      MODE_SELU:    return (f2r(x) < 0.0) ? fp_mul_ref(r2f(1.0507009873554805 * 1.6732632423543772),
                                                       fp_add_ref(t, mone))
                                          : fp_mul_ref(r2f(1.0507009873554805), x);
      default:      return t;
    endcase
  endfunction

  function automatic int ref_lat(mode_t m);
    case (m)
      MODE_SIGMOID, MODE_TANH: return 1 + ADD_LAT + DIV_LAT;
      MODE_SELU:               return 1 + ADD_LAT + MUL_LAT;
      MODE_SWISH, MODE_GELU:   return 1 + MUL_LAT;
      default:                 return 1;
    endcase
  endfunction

  initial begin
    logic [31:0] x, t, exp;
    in_valid = 0; in_data = '0; out_ready = 0; mode = MODE_POLY;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int m = 0; m < 7; m++) begin
      mode = mode_t'(m);
      for (int i = 0; i < 60; i++) begin
        x = rand_fp(110, 135);
        t = rand_fp(110, 135);
        if (mode == MODE_SELU) begin
          if (x[31]) selu_neg++;
          else       selu_pos++;
        end
        in_valid = 1;
        in_data  = '{x: x, v: t, last: 1'($urandom)};
        while (!in_ready) begin @(posedge clk); #1; end
        t_in = cyc;
        @(posedge clk); #1;
        in_valid = 0;
        out_ready = 1;
        while (!out_valid) begin @(posedge clk); #1; end
        check(int'(cyc - t_in) == ref_lat(mode), $sformatf("mode %0d latency %0d", m, cyc - t_in));
        exp = ref_post(mode, x, t);
        check(out_data.v == exp && out_data.x == x && out_data.last == in_data.last,
              $sformatf("mode %0d x=%h T=%h: %h expected %h", m, x, t, out_data.v, exp));
        @(posedge clk); #1;
        out_ready = 0;
      end
    end
    check(selu_neg > 0 && selu_pos > 0, "both SELU branches");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
