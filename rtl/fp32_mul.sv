// fp32_mul: FP32 multiplier, y = a * b, with LATENCY pipeline stages.
//
// The paper's engine works in FP32 and draws a multiplier inside the TYTAN core
// and in several add-ons, without describing its insides; this is a plain
// implementation. The 24x24-bit significand product is normalised and rounded
// to nearest-even. Subnormal inputs count as zero and results below the normal
// range flush to a signed zero (flush-to-zero); overflow gives infinity; any
// NaN, or 0 * inf, gives the quiet NaN 0x7FC00000.
//
// Timing: the result is computed combinationally from a and b and then passes
// through LATENCY registers, so y is valid LATENCY cycles after a and b are
// applied, provided they are held (or, being a pipeline, one new operand pair
// may enter per cycle). LATENCY = 0 makes the unit purely combinational.
module fp32_mul
  import tytan_pkg::*;
#(
  parameter int unsigned LATENCY = 1
) (
  input  logic  clk,
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  fp32_t res;

  always_comb begin
    logic               sa, sb, sy;
    logic [7:0]         ea, eb;
    logic [47:0]        prod;
    logic [23:0]        mant;
    logic               g, st;
    logic [24:0]        mant_r;
    logic signed [10:0] e;
    logic               a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;

    sa = a[31]; sb = b[31]; sy = sa ^ sb;
    ea = a[30:23]; eb = b[30:23];
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (a[22:0] == '0);
    b_inf  = (eb == 8'hFF) && (b[22:0] == '0);
    a_nan  = (ea == 8'hFF) && (a[22:0] != '0);
    b_nan  = (eb == 8'hFF) && (b[22:0] != '0);

    prod = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e    = $signed({3'b0, ea}) + $signed({3'b0, eb}) - 11'sd127;
    if (prod[47]) begin
      mant = prod[47:24];
      g    = prod[23];
      st   = |prod[22:0];
      e    = e + 11'sd1;
    end else begin
      mant = prod[46:23];
      g    = prod[22];
      st   = |prod[21:0];
    end
    mant_r = {1'b0, mant} + 25'(g && (st || mant[0]));
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e      = e + 11'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      res = FP_QNAN;
    else if (a_inf || b_inf)
      res = {sy, 8'hFF, 23'd0};
    else if (a_zero || b_zero)
      res = {sy, 31'd0};
    else if (e >= 11'sd255)
      res = {sy, 8'hFF, 23'd0};
    else if (e <= 11'sd0)
      res = {sy, 31'd0};
    else
      res = {sy, e[7:0], mant_r[22:0]};
  end

  fp32_t pipe [LATENCY+1];
  assign pipe[0] = res;
  for (genvar i = 1; i <= LATENCY; i++) begin : g_pipe
    always_ff @(posedge clk) pipe[i] <= pipe[i-1];
  end
  assign y = pipe[LATENCY];

endmodule
