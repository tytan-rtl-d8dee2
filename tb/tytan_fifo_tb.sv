// tytan_fifo_tb: self-checking test of tytan_fifo (input and output buffer).
//
// Pushes and pops random words with random valid/ready patterns and compares
// every word read with a queue model; checks the count, that in_ready drops
// exactly when DEPTH words are held (the writer stalls) and that out_valid
// drops when the buffer is empty. Runs at the default depth of 30.
module tytan_fifo_tb;

  localparam int unsigned DEPTH = 30;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        in_valid, in_ready, out_valid, out_ready;
  logic [31:0] in_data, out_data;
  logic [4:0]  count;
  logic [31:0] model [$];
  int          checks = 0, failures = 0, full_seen = 0, empty_seen = 0;

  always #5 clk = ~clk;

  tytan_fifo #(.DEPTH(DEPTH)) dut (.*);

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
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      // phases: mostly writing, mostly reading, mixed
      int wp, rp;
      wp = (cyc % 1500 < 500) ? 90 : (cyc % 1500 < 1000) ? 10 : 50;
      rp = 100 - wp;
      @(negedge clk);
      in_valid  = ($urandom_range(99) < wp);
      out_ready = ($urandom_range(99) < rp);
      in_data   = $urandom;
      check(count == 5'(model.size()), "count");
      check(in_ready == (model.size() < DEPTH), "in_ready");
      check(out_valid == (model.size() > 0), "out_valid");
      if (out_valid) check(out_data == model[0], "data order");
      if (!in_ready) full_seen++;
      if (!out_valid) empty_seen++;
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    check(full_seen > 0, "buffer never became full");
    check(empty_seen > 0, "buffer never became empty");
    $display("full cycles=%0d empty cycles=%0d", full_seen, empty_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
