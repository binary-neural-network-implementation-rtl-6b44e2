// tb_neuron_pe: checks the XNOR-popcount neuron lane.
//
// Runs 200 random neurons with fan-in 1..784 and random thresholds (some set
// equal to the final z to test the >= edge), feeding one bit pair per cycle,
// and compares popcount, z = 2m-N and act with a count made in the bench. It
// also checks that clear wins over acc_en and that the count holds while
// acc_en is low.
module tb_neuron_pe;
  logic clk = 1'b0, rst_n = 1'b0;
  logic clear, acc_en, x_bit, w_bit;
  logic [9:0] n_inputs, popcount;
  logic signed [10:0] threshold, z;
  logic act;
  int checks = 0, failures = 0, equal_cases = 0;

  always #5 clk = ~clk;

  neuron_pe dut (.clk, .rst_n, .clear, .acc_en, .x_bit, .w_bit, .n_inputs, .threshold,
                 .popcount, .z, .act);

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    clear = 0; acc_en = 0; x_bit = 0; w_bit = 0; n_inputs = 0; threshold = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int n, m, ez, th;
      n = (t < 3) ? (t == 0 ? 784 : t == 1 ? 128 : 64) : 1 + int'($urandom_range(783));
      n_inputs = 10'(n);
      clear = 1;
      @(negedge clk);
      clear = 0;
      expect_eq("cleared", int'(popcount), 0);
      m = 0;
      for (int i = 0; i < n; i++) begin
        acc_en = 1;
        x_bit = 1'($urandom);
        w_bit = 1'($urandom);
        if (x_bit == w_bit) m++;
        @(negedge clk);
        // A gap with acc_en low must not change the count.
        if (i == n / 2) begin
          acc_en = 0; x_bit = 1; w_bit = 1;
          @(negedge clk);
        end
      end
      acc_en = 0;
      ez = 2 * m - n;
      case (t % 4)
        0: th = ez;                 // exactly at the threshold
        1: th = ez + 1;             // just above
        default: th = int'($urandom_range(64)) - 32;
      endcase
      if (th == ez) equal_cases++;
      threshold = 11'(th);
      #1;
      expect_eq("popcount", int'(popcount), m);
      expect_eq("z", int'(z), ez);
      expect_eq("act", int'(act), (ez >= th) ? 1 : 0);
      @(negedge clk);
    end
    // clear has priority over acc_en
    clear = 1; acc_en = 1; x_bit = 1; w_bit = 1;
    @(negedge clk);
    clear = 0; acc_en = 0;
    expect_eq("clear priority", int'(popcount), 0);
    checks++;
    if (equal_cases == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
