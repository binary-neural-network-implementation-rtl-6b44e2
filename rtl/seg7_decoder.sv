// seg7_decoder: drives the seven-segment display with the predicted digit.
//
// seg[0..6] are segments a..g, active low, for a common-anode display such
// as the one on the Nexys A7 board; an[7:0] are the digit enables, active low,
// with only the rightmost digit (an[0]) lit. While valid is low, or for a
// value above 9, the display is blank. Purely combinational. The decoder
// itself belongs to the design; polarity and digit selection are this
// implementation's choice.
module seg7_decoder (
  input  logic [3:0] digit,
  input  logic       valid,
  output logic [6:0] seg,
  output logic [7:0] an
);

  logic [6:0] on;  // active-high pattern, bit 0 = a ... bit 6 = g

  always_comb begin
    unique case (digit)
      4'd0:    on = 7'b011_1111;
      4'd1:    on = 7'b000_0110;
      4'd2:    on = 7'b101_1011;
      4'd3:    on = 7'b100_1111;
      4'd4:    on = 7'b110_0110;
      4'd5:    on = 7'b110_1101;
      4'd6:    on = 7'b111_1101;
      4'd7:    on = 7'b000_0111;
      4'd8:    on = 7'b111_1111;
      4'd9:    on = 7'b110_1111;
      default: on = 7'b000_0000;
    endcase
    seg = valid ? ~on : 7'b111_1111;
    an  = valid ? 8'b1111_1110 : 8'b1111_1111;
  end

endmodule
