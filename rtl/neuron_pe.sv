// neuron_pe: one parallel neuron lane (XNOR-popcount neuron).
//
// Every cycle with acc_en high the lane XNORs one input bit with the matching
// weight bit and adds the result (1 on a match) to its popcount; clear zeroes
// the count and has priority. From the count it forms, combinationally, the
// signed dot-product value z = 2*popcount - n_inputs of the +/-1 vectors and
// the binary activation act = (z >= threshold), the batch-norm-folded sign
// function. For the output layer the caller ignores act and uses z directly.
//
// Timing: popcount, z and act reflect all accumulate cycles up to the last
// clock edge. The bit-serial accumulation and the 2m-N / threshold rule follow
// the design's inference algorithm; the counter widths are this
// implementation's choice (enough for a fan-in of 784).
module neuron_pe
  import bnn_pkg::*;
#(
  parameter int unsigned CW = CNT_W,
  parameter int unsigned SW = SUM_W,
  parameter int unsigned TW = TH_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 acc_en,
  input  logic                 x_bit,
  input  logic                 w_bit,
  input  logic [CW-1:0]        n_inputs,
  input  logic signed [TW-1:0] threshold,
  output logic [CW-1:0]        popcount,
  output logic signed [SW-1:0] z,
  output logic                 act
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                        popcount <= '0;
    else if (clear)                    popcount <= '0;
    else if (acc_en && (x_bit ~^ w_bit)) popcount <= popcount + 1'b1;
  end

  always_comb begin
    z   = SW'(signed'({1'b0, popcount, 1'b0})) - SW'(signed'({1'b0, n_inputs}));
    act = (z >= SW'(threshold));
  end

endmodule
