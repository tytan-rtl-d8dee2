// fp32_div_tb: self-checking test of fp32_div.
//
// Applies directed operands (signed zeros, exact cancellation, rounding ties,
// infinities) and random operands over a wide exponent range, holds them for
// the unit's LATENCY cycles and compares the result bit for bit with the
// double-precision reference of tb_fp_pkg. The pipeline depth is checked by
// sampling one cycle early: the result must not yet be there for an operand
// pair whose result differs from the previous one.
module fp32_div_tb;
  import tb_fp_pkg::*;

  localparam int unsigned LAT = 3;

  logic        clk = 1'b0;
  logic [31:0] a, b, y;
  int          checks = 0, failures = 0;

  always #5 clk = ~clk;

  fp32_div #(.LATENCY(LAT)) dut (.clk(clk), .a(a), .b(b), .y(y));

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
      if (failures < 20) $display("MISMATCH %h div %h = %h expected %h", ta, tb, y, exp);
    end
  endtask

  initial begin
    logic [31:0] ra, rb;
    a = '0;
    b = '0;
    repeat (LAT + 2) @(posedge clk);
    #1;
    apply(32'h4040_0000, 32'h4000_0000, 32'h3FC0_0000);  // 3 / 2 = 1.5
    apply(32'h3F80_0000, 32'h4040_0000, 32'h3EAA_AAAB);  // 1 / 3
    apply(32'hC000_0000, 32'h0000_0000, 32'hFF80_0000);  // -2 / 0 = -inf
    apply(32'h0000_0000, 32'h0000_0000, 32'h7FC0_0000);  // 0 / 0 = NaN
    apply(32'h0000_0000, 32'h4000_0000, 32'h0000_0000);  // 0 / 2 = 0
    for (int i = 0; i < 3000; i++) begin
      ra = rand_fp(70, 184);
      rb = rand_fp(70, 184);
      apply(ra, rb, fp_div_ref(ra, rb));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
