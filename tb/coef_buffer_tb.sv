// coef_buffer_tb: self-checking test of coef_buffer.
//
// Writes random coefficient sets of several lengths, including the full depth
// of 30 and a write beyond it (must be dropped), reads every entry back by
// index (one cycle read latency) and checks n_terms, full and clear.
module coef_buffer_tb;
  import tytan_pkg::*;

  localparam int unsigned DEPTH = 30;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        clear, wr_en, full;
  fp32_t       wr_data, rd_data;
  logic [4:0]  rd_idx;
  logic [4:0]  n_terms;
  fp32_t       model [DEPTH];
  int          checks = 0, failures = 0;

  always #5 clk = ~clk;

  coef_buffer #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
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
    int lens [4] = '{30, 1, 17, 30};
    clear = 0; wr_en = 0; wr_data = 0; rd_idx = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    check(n_terms == 0, "empty after reset");
    foreach (lens[t]) begin
      clear = 1;
      @(posedge clk); #1;
      clear = 0;
      check(n_terms == 0, "empty after clear");
      for (int i = 0; i < lens[t] + ((t == 3) ? 2 : 0); i++) begin
        wr_en   = 1;
        wr_data = $urandom;
        if (i < DEPTH) model[i] = wr_data;
        @(posedge clk); #1;
      end
      wr_en = 0;
      check(n_terms == 5'(lens[t]), "n_terms after writes");
      check(full == (lens[t] == DEPTH), "full flag");
      for (int i = 0; i < lens[t]; i++) begin
        rd_idx = 5'(i);
        @(posedge clk); #1;
        check(rd_data == model[i], $sformatf("entry %0d", i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
