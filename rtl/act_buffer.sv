// act_buffer: result register of one layer, filled one neuron group at a time.
//
// Holds N_ELEM results of DW bits each, packed with element j in
// vec[j*DW +: DW]. For a hidden layer DW = 1 and the register is the binary
// activation vector that feeds the next layer; for the output layer
// DW = SUM_W and it keeps the raw sums that the argmax compares. A write
// stores the PAR lane results `data` (lane k in data[k*DW +: DW]) at elements
// group*PAR ... group*PAR+PAR-1; elements at or past N_ELEM (idle lanes of a
// partly filled last group) are dropped. Reset clears the register; writes
// take effect at the clock edge where we is high. Collecting results per
// group is implied by the design's algorithm; the register form is this
// implementation's choice.
module act_buffer #(
  parameter int unsigned N_ELEM = 128,
  parameter int unsigned DW     = 1,
  parameter int unsigned PAR    = 64,
  parameter int unsigned NG     = (N_ELEM + PAR - 1) / PAR,
  parameter int unsigned GW     = (NG > 1) ? $clog2(NG) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  we,
  input  logic [GW-1:0]         group,
  input  logic [PAR*DW-1:0]     data,
  output logic [N_ELEM*DW-1:0]  vec
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vec <= '0;
    end else if (we) begin
      for (int unsigned k = 0; k < PAR; k++) begin
        if (32'(group) * PAR + k < N_ELEM) vec[(32'(group) * PAR + k) * DW +: DW] <= data[k * DW +: DW];
      end
    end
  end

endmodule
