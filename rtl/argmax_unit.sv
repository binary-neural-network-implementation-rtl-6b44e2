// argmax_unit: sequential argmax over the output-layer sums.
//
// A start pulse copies score 0 as the running maximum; the following N-1
// cycles compare one further score each against it and keep the larger
// (strictly larger, so a tie goes to the lower index). done pulses for one
// cycle N cycles after start, with idx and max_val final; both hold until the
// next start. The scores must stay stable during the search. The one-class-
// per-cycle comparison follows the design's classification stage; the tie
// rule is this implementation's choice.
module argmax_unit
  import bnn_pkg::*;
#(
  parameter int unsigned N  = N_OUT,
  parameter int unsigned SW = SUM_W,
  parameter int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [SW-1:0] scores [N],
  output logic [IW-1:0]        idx,
  output logic signed [SW-1:0] max_val,
  output logic                 done
);

  logic          busy;
  logic [IW-1:0] cur;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      cur     <= '0;
      idx     <= '0;
      max_val <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        max_val <= scores[0];
        idx     <= '0;
        cur     <= IW'(1);
        busy    <= (N > 1);
        done    <= (N == 1);
      end else if (busy) begin
        if (scores[cur] > max_val) begin
          max_val <= scores[cur];
          idx     <= cur;
        end
        if (32'(cur) == N - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        cur <= cur + 1'b1;
      end
    end
  end

endmodule
