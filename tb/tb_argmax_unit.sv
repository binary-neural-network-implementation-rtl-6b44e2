// tb_argmax_unit: checks the sequential argmax.
//
// 300 searches over 10 random signed sums (many with deliberate ties and
// negative values); the result must be the first index of the maximum, done
// must pulse exactly 10 cycles after start, and idx must hold afterwards.
module tb_argmax_unit;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start, done;
  logic signed [10:0] scores [10];
  logic [3:0] idx;
  logic signed [10:0] max_val;
  int checks = 0, failures = 0, ties = 0;

  always #5 clk = ~clk;

  argmax_unit #(.N(10), .SW(11)) dut (.clk, .rst_n, .start, .scores, .idx, .max_val, .done);

  initial begin
    start = 0;
    foreach (scores[j]) scores[j] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int best, cyc, range;
      range = (t % 3 == 0) ? 3 : 1500;
      foreach (scores[j]) scores[j] = 11'(int'($urandom_range(range)) - range / 2);
      best = 0;
      for (int j = 1; j < 10; j++) if (scores[j] > scores[best]) best = j;
      for (int j = 0; j < 10; j++) if (j != best && scores[j] == scores[best]) begin ties++; break; end
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done && cyc < 50) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 10) begin failures++; $display("FAIL latency %0d", cyc); end
      checks++;
      if (int'(idx) != best || max_val != scores[best]) begin
        failures++; $display("FAIL t=%0d idx %0d exp %0d", t, idx, best);
      end
      @(negedge clk);
      checks++;
      if (done || int'(idx) != best) begin failures++; $display("FAIL done not a pulse or idx moved"); end
    end
    checks++;
    if (ties == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
