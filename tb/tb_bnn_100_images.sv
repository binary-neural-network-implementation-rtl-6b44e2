// tb_bnn_100_images: the 100-image correctness run at the default 64 lanes.
//
// The original design was verified by classifying 100 binarized test images
// (ten per digit) one after another. This bench builds the engine with a
// 100-image ROM, classifies every image in turn (reset, wait for done) and
// compares each predicted class and latency with the reference model. The
// images are the hash-generated placeholders, so the agreement with the
// reference is what is checked, not recognition accuracy; a histogram of the
// predicted classes is printed.
module tb_bnn_100_images;
  import tb_ref_pkg::*;

  localparam int NIMG = 100;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [6:0] img_sel;
  logic done;
  logic [3:0] digit;
  logic [6:0] seg;
  logic [7:0] an;
  int checks = 0, failures = 0;
  int hist [R_OUT];

  always #5 clk = ~clk;

  bnn_top #(.NUM_IMAGES(NIMG)) dut (.clk, .rst_n, .img_sel, .done, .digit, .seg, .an);

  initial begin
    bit a1 [R_H1];
    bit a2 [R_H2];
    int s [R_OUT];
    int ties, cls, cyc;
    foreach (hist[j]) hist[j] = 0;
    img_sel = 0;
    for (int img = 0; img < NIMG; img++) begin
      cls = r_infer(img, a1, a2, s, ties);
      img_sel = 7'(img);
      rst_n = 0;
      repeat (2) @(negedge clk);
      rst_n = 1;
      cyc = 0;
      while (!done && cyc < 5000) begin
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (int'(digit) != cls) begin failures++; $display("FAIL image %0d: %0d, expected %0d", img, digit, cls); end
      checks++;
      if (cyc != r_latency(64)) begin failures++; $display("FAIL image %0d latency %0d", img, cyc); end
      hist[cls]++;
    end
    $display("predicted classes 0..9: %0d %0d %0d %0d %0d %0d %0d %0d %0d %0d",
             hist[0], hist[1], hist[2], hist[3], hist[4], hist[5], hist[6], hist[7], hist[8], hist[9]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NIMG * 1800 + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
