// tytan_fifo: synchronous FIFO used as the engine's input and output buffer.
//
// The paper draws an input buffer in front of the TYTAN core and a buffer that
// receives the processing unit's results, and sizes the input buffer by the 30
// input values of its latency table; it says nothing about their insides.
// This is a plain circular buffer of DEPTH entries of type T with a valid/ready
// handshake on both sides: a word is written when in_valid && in_ready
// (in_ready = not full) and read when out_valid && out_ready (out_valid = not
// empty). The head entry is always visible on out_data (show-ahead), so a read
// and a write can both happen in every cycle. count reports the fill level.
// Reset (rst_n low, synchronous) empties the buffer; the storage itself is not
// reset.
module tytan_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 30
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  T                           in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output T                           out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                            mem [DEPTH];
  logic [AW-1:0]               wr_ptr, rd_ptr;
  logic                        do_wr, do_rd;

  assign in_ready  = (count != ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign do_wr     = in_valid && in_ready;
  assign do_rd     = out_valid && out_ready;

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= next_ptr(wr_ptr);
      if (do_rd) rd_ptr <= next_ptr(rd_ptr);
      case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= in_data;
  end

  // The fill level never exceeds the depth.
  a_count_range: assert property (@(posedge clk) disable iff (!rst_n)
    count <= ($clog2(DEPTH+1))'(DEPTH));
  // A word offered to the reader stays put until it is taken.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && (out_data == $past(out_data)));

endmodule
