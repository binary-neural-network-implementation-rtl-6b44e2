// threshold_rom: folded batch-norm thresholds of one lane of a hidden layer.
//
// Row r holds the 11-bit signed threshold of neuron r*PAR+UNIT; a neuron
// fires when its XNOR-popcount sum z = 2*popcount - N is at least this value.
// The read is combinational, the way a small LUT (distributed) ROM behaves;
// the design keeps thresholds out of block RAM for this reason. Rows past the
// last neuron read as zero. The contents come from bnn_pkg::threshold_val
// (placeholder for the trained, folded thresholds). The rom_style attribute
// asks for a distributed (LUT) ROM.
module threshold_rom
  import bnn_pkg::*;
#(
  parameter int unsigned LAYER     = 1,
  parameter int unsigned UNIT      = 0,
  parameter int unsigned PAR       = 64,
  parameter int unsigned N_NEURONS = 128,
  parameter int unsigned DEPTH     = (N_NEURONS + PAR - 1) / PAR,
  parameter int unsigned AW        = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic [AW-1:0]           addr,
  output logic signed [TH_W-1:0]  threshold
);

  (* rom_style = "distributed" *) logic signed [TH_W-1:0] rom [DEPTH];

  initial begin
    for (int unsigned r = 0; r < DEPTH; r++) begin
      rom[r] = (r * PAR + UNIT < N_NEURONS) ? threshold_val(LAYER, r * PAR + UNIT) : '0;
    end
  end

  always_comb begin
    threshold = (32'(addr) < DEPTH) ? rom[addr] : '0;
  end

endmodule
