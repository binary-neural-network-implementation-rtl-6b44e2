// tb_seg7_decoder: checks the seven-segment patterns.
//
// The expected pattern of each digit is written as the list of lit segment
// letters (a = top, then clockwise, g = middle) and converted to the
// active-low bus; values above 9 and valid = 0 must blank the display.
module tb_seg7_decoder;
  logic [3:0] digit;
  logic valid;
  logic [6:0] seg;
  logic [7:0] an;
  int checks = 0, failures = 0;

  seg7_decoder dut (.digit, .valid, .seg, .an);

  function automatic logic [6:0] lit(string s);
    logic [6:0] v;
    v = 7'b111_1111;
    for (int i = 0; i < s.len(); i++) v[s[i] - "a"] = 1'b0;
    return v;
  endfunction

  initial begin
    string pat [10] = '{"abcdef", "bc", "abdeg", "abcdg", "bcfg", "acdfg", "acdefg", "abc", "abcdefg", "abcdfg"};
    valid = 1;
    for (int d = 0; d < 10; d++) begin
      digit = 4'(d);
      #1;
      checks++;
      if (seg !== lit(pat[d]) || an !== 8'b1111_1110) begin
        failures++; $display("FAIL digit %0d seg %b exp %b", d, seg, lit(pat[d]));
      end
    end
    for (int d = 10; d < 16; d++) begin
      digit = 4'(d);
      #1;
      checks++;
      if (seg !== 7'h7f) begin failures++; $display("FAIL blank %0d", d); end
    end
    valid = 0;
    digit = 4'd8;
    #1;
    checks++;
    if (seg !== 7'h7f || an !== 8'hff) begin failures++; $display("FAIL invalid not blank"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
