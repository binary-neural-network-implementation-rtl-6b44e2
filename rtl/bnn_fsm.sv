// bnn_fsm: central controller of the BNN inference engine.
//
// Runs the five stages of one inference in order: first hidden layer, second
// hidden layer, output layer, classification, done. A layer with N inputs and
// M neurons is processed in ceil(M/PAR) groups of PAR neurons, one neuron per
// lane. Each group takes N+2 cycles:
//   PH_LOAD  1 cycle   rom_en reads row `group` of every weight ROM, clear
//                      zeroes the lane popcounts;
//   PH_ACC   N cycles  acc_en with bit_idx = 0..N-1, one input bit per cycle;
//   PH_THR   1 cycle   act1_we / act2_we / score_we store the group's
//                      activations (hidden layers) or raw sums (output layer).
// Classification pulses argmax_start in its first cycle and waits for
// argmax_done; the controller then sits in S_DONE with done high until reset.
// Inference starts by itself when rst_n (active low, asynchronous) is
// released. From the first clock edge after reset the first cycle with done
// high is cycle sum_l G_l*(N_l+2) + 11 for a 10-class argmax: 1779 cycles at
// PAR = 64. The stage sequence follows the design; the per-group cycle
// split is this implementation's choice, made to agree with the latencies the
// design reports for its parallelism levels.
module bnn_fsm
  import bnn_pkg::*;
#(
  parameter int unsigned PAR  = 64,
  parameter int unsigned N_I  = N_IN,
  parameter int unsigned N_1  = N_H1,
  parameter int unsigned N_2  = N_H2,
  parameter int unsigned N_O  = N_OUT,
  parameter int unsigned G1   = (N_1 + PAR - 1) / PAR,
  parameter int unsigned G2   = (N_2 + PAR - 1) / PAR,
  parameter int unsigned G3   = (N_O + PAR - 1) / PAR,
  parameter int unsigned GMAX = (G1 > G2) ? ((G1 > G3) ? G1 : G3) : ((G2 > G3) ? G2 : G3),
  parameter int unsigned GW   = (GMAX > 1) ? $clog2(GMAX) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              argmax_done,
  output state_e            state,
  output phase_e            phase,
  output logic [GW-1:0]     group,
  output logic [BIT_W-1:0]  bit_idx,
  output logic [CNT_W-1:0]  n_inputs,
  output logic              rom_en,
  output logic              clear,
  output logic              acc_en,
  output logic              act1_we,
  output logic              act2_we,
  output logic              score_we,
  output logic              argmax_start,
  output logic              done
);

  logic            in_layer;
  logic [GW-1:0]   last_group;

  always_comb begin
    in_layer = (state == S_L1) || (state == S_L2) || (state == S_OUT);
    unique case (state)
      S_L1:    begin n_inputs = CNT_W'(N_I); last_group = GW'(G1 - 1); end
      S_L2:    begin n_inputs = CNT_W'(N_1); last_group = GW'(G2 - 1); end
      S_OUT:   begin n_inputs = CNT_W'(N_2); last_group = GW'(G3 - 1); end
      default: begin n_inputs = '0;          last_group = '0;          end
    endcase
    rom_en       = in_layer && (phase == PH_LOAD);
    clear        = in_layer && (phase == PH_LOAD);
    acc_en       = in_layer && (phase == PH_ACC);
    act1_we      = (state == S_L1)  && (phase == PH_THR);
    act2_we      = (state == S_L2)  && (phase == PH_THR);
    score_we     = (state == S_OUT) && (phase == PH_THR);
    argmax_start = (state == S_CLASSIFY) && (phase == PH_LOAD);
    done         = (state == S_DONE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_L1;
      phase   <= PH_LOAD;
      group   <= '0;
      bit_idx <= '0;
    end else begin
      unique case (phase)
        PH_LOAD: begin
          bit_idx <= '0;
          if (state != S_DONE) phase <= PH_ACC;
        end
        PH_ACC: begin
          if (in_layer) begin
            if (bit_idx == BIT_W'(n_inputs - 1'b1)) phase <= PH_THR;
            else                                  bit_idx <= bit_idx + 1'b1;
          end else if (state == S_CLASSIFY && argmax_done) begin
            state <= S_DONE;
          end
        end
        PH_THR: begin
          phase   <= PH_LOAD;
          bit_idx <= '0;
          if (group == last_group) begin
            group <= '0;
            unique case (state)
              S_L1:    state <= S_L2;
              S_L2:    state <= S_OUT;
              default: state <= S_CLASSIFY;
            endcase
          end else begin
            group <= group + 1'b1;
          end
        end
        default: phase <= PH_LOAD;
      endcase
    end
  end

  // Protocol rules of the controller.
  a_one_strobe: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({clear, acc_en, act1_we, act2_we, score_we, argmax_start}));
  a_done_holds: assert property (@(posedge clk) disable iff (!rst_n)
    done |=> done);

endmodule
