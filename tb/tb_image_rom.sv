// tb_image_rom: checks the test-image ROM.
//
// Reads all 10 images in a shuffled order, compares each 784-bit row with
// the reference, checks that the output holds while en is low, and that an
// index past the last image reads as a blank image.
module tb_image_rom;
  import tb_ref_pkg::*;

  logic clk = 1'b0;
  logic en;
  logic [3:0] addr;
  logic [783:0] q;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  image_rom #(.NUM_IMAGES(10), .WIDTH(784)) dut (.clk, .en, .addr, .q);

  function automatic logic [783:0] expect_img(int n);
    logic [783:0] v;
    for (int i = 0; i < 784; i++) v[i] = r_pixel(n, i);
    return v;
  endfunction

  task automatic check(string what, logic [783:0] got, logic [783:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %0d bits differ", what, $countones(got ^ exp)); end
  endtask

  initial begin
    int order [10] = '{3, 7, 0, 9, 1, 5, 2, 8, 4, 6};
    en = 0; addr = 0;
    @(negedge clk);
    foreach (order[n]) begin
      en = 1; addr = 4'(order[n]);
      @(negedge clk);
      check($sformatf("image %0d", order[n]), q, expect_img(order[n]));
    end
    en = 0; addr = 4'd2;
    @(negedge clk);
    check("hold", q, expect_img(6));
    en = 1; addr = 4'd12;
    @(negedge clk);
    check("out of range", q, '0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
