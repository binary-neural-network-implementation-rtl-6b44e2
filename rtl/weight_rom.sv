// weight_rom: dual-port read-only weight memory of one parallel lane of one
// layer.
//
// Lane UNIT of a layer with N_NEURONS neurons and PAR lanes holds the neurons
// UNIT, UNIT+PAR, UNIT+2*PAR, ...; row r is the complete WIDTH-bit weight
// vector of neuron r*PAR+UNIT (weights exported transposed, one neuron per
// row, as in the design's export flow). Rows past the last neuron read as
// zero. Bit i of a row is the weight of input i; 1 encodes +1, 0 encodes -1.
//
// Both ports read synchronously: q_x shows row addr_x one clock after en_x is
// high and holds it while en_x is low, like a block RAM with output hold. The
// dual-port form follows the design; its controller reads through port A only
// and leaves port B free, as the original did. The contents come from
// bnn_pkg::weight_chunk (placeholder for trained weights); WIDTH must be a
// multiple of 16. The array carries the
// rom_style = "block" attribute of the block-RAM build, the configuration
// the original design settled on; "distributed" gives its LUT-ROM variant.
module weight_rom
  import bnn_pkg::*;
#(
  parameter int unsigned LAYER     = 1,
  parameter int unsigned UNIT      = 0,
  parameter int unsigned PAR       = 64,
  parameter int unsigned N_NEURONS = 128,
  parameter int unsigned WIDTH     = 784,
  parameter int unsigned DEPTH     = (N_NEURONS + PAR - 1) / PAR,
  parameter int unsigned AW        = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             en_a,
  input  logic [AW-1:0]    addr_a,
  output logic [WIDTH-1:0] q_a,
  input  logic             en_b,
  input  logic [AW-1:0]    addr_b,
  output logic [WIDTH-1:0] q_b
);

  (* rom_style = "block" *) logic [WIDTH-1:0] mem [DEPTH];

  if (WIDTH % CHUNK != 0) begin : g_width_check
    $error("weight_rom: WIDTH must be a multiple of 16");
  end

  initial begin
    for (int unsigned r = 0; r < DEPTH; r++) begin
      for (int unsigned c = 0; c < WIDTH / CHUNK; c++) begin
        mem[r][c * CHUNK +: CHUNK] = (r * PAR + UNIT < N_NEURONS) ? weight_chunk(LAYER, r * PAR + UNIT, c) : '0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (en_a) q_a <= mem[addr_a];
  end

  always_ff @(posedge clk) begin
    if (en_b) q_b <= mem[addr_b];
  end

endmodule
