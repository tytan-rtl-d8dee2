// coef_buffer: the TYTAN core's internal coefficient buffer.
//
// Holds the Taylor coefficients of the polynomial the core evaluates. The
// paper calls it an internal FIFO buffer, programmed with precomputed
// coefficients through a dedicated port and reused for every input element;
// the number of stored coefficients sets the number of Horner steps, i.e. the
// accuracy. Here it is written like a FIFO (each wr_en appends one FP32 word,
// the first word written is read first) but read by index, so the core can
// walk it from entry 0 to entry n_terms-1 once per input element without
// consuming it. The host writes the highest-order coefficient first:
// entry 0 = c[n-1], ..., entry n-1 = c[0]. clear (or reset) empties the buffer;
// writes to a full buffer are dropped and raise no flag other than full.
//
// Timing: a write takes effect at the next clock edge; rd_data is the
// registered entry rd_idx, valid one cycle after rd_idx is presented.
module coef_buffer
  import tytan_pkg::*;
#(
  parameter int unsigned DEPTH = 30
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       wr_en,
  input  fp32_t                      wr_data,
  input  logic [$clog2(DEPTH)-1:0]   rd_idx,
  output fp32_t                      rd_data,
  output logic [$clog2(DEPTH+1)-1:0] n_terms,
  output logic                       full
);

  fp32_t mem [DEPTH];

  assign full = (n_terms == ($clog2(DEPTH+1))'(DEPTH));

  always_ff @(posedge clk) begin
    if (!rst_n || clear)        n_terms <= '0;
    else if (wr_en && !full)    n_terms <= n_terms + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[n_terms[$clog2(DEPTH)-1:0]] <= wr_data;
    rd_data <= mem[rd_idx];
  end

endmodule
