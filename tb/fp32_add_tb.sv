// fp32_add_tb: self-checking test of fp32_add.
//
// Applies directed operands (signed zeros, exact cancellation, rounding ties,
// infinities) and random operands over a wide exponent range, holds them for
// the unit's LATENCY cycles and compares the result bit for bit with the
// double-precision reference of tb_fp_pkg. The pipeline depth is checked by
// sampling one cycle early: the result must not yet be there for an operand
// pair whose result differs from the previous one.
module fp32_add_tb;
  import tb_fp_pkg::*;

  localparam int unsigned LAT = 3;

  logic        clk = 1'b0;
  logic [31:0] a, b, y;
  int          checks = 0, failures = 0;

  always #5 clk = ~clk;

  fp32_add #(.LATENCY(LAT)) dut (.clk(clk), .a(a), .b(b), .y(y));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(logic [31:0] ta, logic [31:0] tb, logic [31:0] exp);
    logic [31:0] prev;
    prev = y;
    a = ta;
    b = tb;
    repeat (LAT - 1) @(posedge clk);
    #1;
    if (exp != prev) begin
      checks++;
      if (y != prev) begin
        failures++;
        $display("latency: result after %0d cycles, expected %0d", LAT - 1, LAT);
      end
    end
    @(posedge clk);
    #1;
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 20) $display("MISMATCH %h add %h = %h expected %h", ta, tb, y, exp);
    end
  endtask

  initial begin
    logic [31:0] ra, rb;
    a = '0;
    b = '0;
    repeat (LAT + 2) @(posedge clk);
    #1;
    apply(32'h3F80_0000, 32'h4000_0000, 32'h4040_0000);  // 1 + 2 = 3
    apply(32'h4040_0000, 32'hC040_0000, 32'h0000_0000);  // 3 - 3 = +0
    apply(32'h8000_0000, 32'h8000_0000, 32'h8000_0000);  // -0 + -0 = -0
    apply(32'h3F80_0000, 32'h3380_0000, 32'h3F80_0000);  // 1 + 2^-24: tie to even
    apply(32'h3F80_0001, 32'h3380_0000, 32'h3F80_0002);  // tie rounds up to even
    apply(32'h3F80_0000, 32'hB380_0000, 32'h3F7F_FFFF);  // 1 - 2^-24 exact
    apply(32'h7F80_0000, 32'hFF80_0000, 32'h7FC0_0000);  // inf - inf = NaN
    apply(32'h7F7F_FFFF, 32'h7F7F_FFFF, 32'h7F80_0000);  // overflow
    for (int i = 0; i < 3000; i++) begin
      ra = rand_fp(100, 154);
      // half of the pairs have close exponents, where cancellation happens
      if (i % 2 == 0) rb = {1'($urandom), 8'(int'(ra[30:23]) + int'($urandom_range(2)) - 1), 23'($urandom)};
      else            rb = rand_fp(100, 154);
      apply(ra, rb, fp_add_ref(ra, rb));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
