// fp32_add: FP32 adder, y = a + b, with LATENCY pipeline stages.
//
// The adder of the TYTAN core and the +1/-1 add-ons. The paper gives only its
// function (FP32 addition); this is a plain implementation. The operand of
// larger magnitude keeps its significand, the other is shifted right by the
// exponent difference into a 50-bit frame whose lowest bit collects the bits
// shifted out (sticky). After the add or subtract, the sum is normalised with a
// leading-zero count and rounded to nearest-even. Subnormals are flushed to
// zero as in fp32_mul; an exact zero sum is +0; inf - inf and NaN inputs give
// the quiet NaN.
//
// Timing: combinational result followed by LATENCY registers, as in fp32_mul.
module fp32_add
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
    fp32_t              greater, lesser;
    logic [7:0]         eb, es, d;
    logic [49:0]        mb, ms, msh;
    logic [50:0]        s;
    logic [49:0]        n;
    logic [5:0]         lz;
    logic               found;
    logic [23:0]        mant;
    logic               g, st;
    logic [24:0]        mant_r;
    logic signed [10:0] e;
    logic               a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;

    a_zero = (a[30:23] == 8'd0);
    b_zero = (b[30:23] == 8'd0);
    a_inf  = (a[30:23] == 8'hFF) && (a[22:0] == '0);
    b_inf  = (b[30:23] == 8'hFF) && (b[22:0] == '0);
    a_nan  = (a[30:23] == 8'hFF) && (a[22:0] != '0);
    b_nan  = (b[30:23] == 8'hFF) && (b[22:0] != '0);

    if (a[30:0] >= b[30:0]) begin
      greater = a; lesser = b;
    end else begin
      greater = b; lesser = a;
    end
    eb = greater[30:23];
    es = lesser[30:23];
    d  = eb - es;
    mb = {1'b1, greater[22:0], 26'd0};
    ms = {1'b1, lesser[22:0], 26'd0};
    if (d >= 8'd50) msh = 50'd1;
    else            msh = (ms >> d) | 50'(|(ms & ((50'd1 << d) - 50'd1)));

    if (greater[31] ^ lesser[31]) s = {1'b0, mb} - {1'b0, msh};
    else                     s = {1'b0, mb} + {1'b0, msh};

    lz    = '0;
    found = 1'b0;
    for (int i = 49; i >= 0; i--) begin
      if (!found && s[i]) begin
        found = 1'b1;
        lz    = 6'(49 - i);
      end
    end

    e = $signed({3'b0, eb});
    if (s[50]) begin
      n    = '0;
      mant = s[50:27];
      g    = s[26];
      st   = |s[25:0];
      e    = e + 11'sd1;
    end else begin
      n    = s[49:0] << lz;
      mant = n[49:26];
      g    = n[25];
      st   = |n[24:0];
      e    = e - $signed({5'b0, lz});
    end
    mant_r = {1'b0, mant} + 25'(g && (st || mant[0]));
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e      = e + 11'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_inf && (a[31] != b[31])))
      res = FP_QNAN;
    else if (a_inf)
      res = a;
    else if (b_inf)
      res = b;
    else if (a_zero && b_zero)
      res = {a[31] & b[31], 31'd0};
    else if (b_zero)
      res = a;
    else if (a_zero)
      res = b;
    else if (s == '0)
      res = FP_ZERO;
    else if (e >= 11'sd255)
      res = {greater[31], 8'hFF, 23'd0};
    else if (e <= 11'sd0)
      res = {greater[31], 31'd0};
    else
      res = {greater[31], e[7:0], mant_r[22:0]};
  end

  fp32_t pipe [LATENCY+1];
  assign pipe[0] = res;
  for (genvar i = 1; i <= LATENCY; i++) begin : g_pipe
    always_ff @(posedge clk) pipe[i] <= pipe[i-1];
  end
  assign y = pipe[LATENCY];

endmodule
