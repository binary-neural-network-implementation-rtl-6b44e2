// image_rom: static ROM of binarized 28x28 test images.
//
// Row n is image n flattened row-major into WIDTH = 784 bits, bit i being
// pixel i (1 = ink/+1, 0 = background/-1). The read is synchronous: q shows
// image addr one clock after en is high and holds it otherwise. Holding the
// test images in ROM follows the design; the image-select input and the
// number of images are this implementation's choice. Contents come from
// bnn_pkg::pixel_chunk (placeholder for binarized test digits); WIDTH must
// be a multiple of 16.
module image_rom
  import bnn_pkg::*;
#(
  parameter int unsigned NUM_IMAGES = 10,
  parameter int unsigned WIDTH      = 784,
  parameter int unsigned IAW        = (NUM_IMAGES > 1) ? $clog2(NUM_IMAGES) : 1
) (
  input  logic             clk,
  input  logic             en,
  input  logic [IAW-1:0]   addr,
  output logic [WIDTH-1:0] q
);

  logic [WIDTH-1:0] mem [NUM_IMAGES];

  if (WIDTH % CHUNK != 0) begin : g_width_check
    $error("image_rom: WIDTH must be a multiple of 16");
  end

  initial begin
    for (int unsigned n = 0; n < NUM_IMAGES; n++) begin
      for (int unsigned c = 0; c < WIDTH / CHUNK; c++) begin
        mem[n][c * CHUNK +: CHUNK] = pixel_chunk(n, c);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (en) q <= (32'(addr) < NUM_IMAGES) ? mem[addr] : '0;
  end

endmodule
