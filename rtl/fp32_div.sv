// fp32_div: FP32 divider, y = a / b, with LATENCY pipeline stages.
//
// The division of the sigmoid and tanh add-ons. The paper only draws it as a
// divide symbol; this is a plain implementation. The 24-bit significand of a,
// extended by 26 zero bits, is divided by the 24-bit significand of b, giving a
// 26- or 27-bit quotient; the remainder feeds the sticky bit and the quotient
// is rounded to nearest-even. Subnormals flush to zero as in fp32_mul;
// x/0 gives a signed infinity, 0/0 and inf/inf give the quiet NaN.
//
// Timing: combinational result followed by LATENCY registers, as in fp32_mul.
module fp32_div
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
    logic               sy;
    logic [49:0]        num;
    logic [26:0]        q;
    logic [23:0]        r;
    logic [23:0]        mant;
    logic               g, st;
    logic [24:0]        mant_r;
    logic signed [10:0] e;
    logic               a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;

    sy     = a[31] ^ b[31];
    a_zero = (a[30:23] == 8'd0);
    b_zero = (b[30:23] == 8'd0);
    a_inf  = (a[30:23] == 8'hFF) && (a[22:0] == '0);
    b_inf  = (b[30:23] == 8'hFF) && (b[22:0] == '0);
    a_nan  = (a[30:23] == 8'hFF) && (a[22:0] != '0);
    b_nan  = (b[30:23] == 8'hFF) && (b[22:0] != '0);

    num = {1'b1, a[22:0], 26'd0};
    q   = 27'(num / {26'd0, 1'b1, b[22:0]});
    r   = 24'(num % {26'd0, 1'b1, b[22:0]});
    e   = $signed({3'b0, a[30:23]}) - $signed({3'b0, b[30:23]}) + 11'sd127;
    if (q[26]) begin
      mant = q[26:3];
      g    = q[2];
      st   = (|q[1:0]) || (r != '0);
    end else begin
      mant = q[25:2];
      g    = q[1];
      st   = q[0] || (r != '0);
      e    = e - 11'sd1;
    end
    mant_r = {1'b0, mant} + 25'(g && (st || mant[0]));
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e      = e + 11'sd1;
    end

    if (a_nan || b_nan || (a_zero && b_zero) || (a_inf && b_inf))
      res = FP_QNAN;
    else if (a_inf || b_zero)
      res = {sy, 8'hFF, 23'd0};
    else if (a_zero || b_inf)
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
