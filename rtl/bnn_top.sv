// bnn_top: binary neural network inference engine for 28x28 handwritten
// digits (784-128-64-10, fully connected), with PAR neurons computed in
// parallel.
//
// Structure. PAR lanes (neuron_pe) each own one weight ROM per layer
// (weight_rom, a full weight vector per row) and one threshold ROM per hidden
// layer (threshold_rom). The controller (bnn_fsm) walks the layers group by
// group: all lanes read their ROM row for the current group, then consume one
// input bit per cycle, the same bit broadcast to every lane, counting XNOR
// matches. The input bits come from the selected test image (image_rom) for
// the first layer and from the previous layer's activation register
// (act_buffer) afterwards. At the end of a group the lanes' threshold
// decisions are stored in the layer's activation register, or, in the output
// layer, their raw sums z = 2*popcount - N in the score register. argmax_unit
// then picks the class with the largest sum, seg7_decoder shows it.
//
// Interface. clk (80 MHz in the original build), rst_n active low. The
// inference of image img_sel starts when rst_n is released; img_sel must be
// stable until done. done rises after sum_l ceil(M_l/PAR)*(N_l+2) + 11
// cycles (1779 at PAR = 64) and stays high, with digit and the display
// holding the result, until the next reset.
//
// The architecture, the parallel-lane organisation, the ROM styles, the
// stage sequence and the default PAR = 64 follow the original design; the
// ROM contents are hash-generated placeholders (see bnn_pkg), and the
// image-select input and display polarity are this implementation's choices.
module bnn_top
  import bnn_pkg::*;
#(
  parameter int unsigned PAR        = 64,
  parameter int unsigned NUM_IMAGES = 10,
  parameter int unsigned IAW        = (NUM_IMAGES > 1) ? $clog2(NUM_IMAGES) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [IAW-1:0] img_sel,
  output logic           done,
  output logic [3:0]     digit,
  output logic [6:0]     seg,
  output logic [7:0]     an
);

  localparam int unsigned G1  = ceil_div(N_H1, PAR);
  localparam int unsigned G2  = ceil_div(N_H2, PAR);
  localparam int unsigned G3  = ceil_div(N_OUT, PAR);
  localparam int unsigned GMAX = (G1 > G2) ? ((G1 > G3) ? G1 : G3) : ((G2 > G3) ? G2 : G3);
  localparam int unsigned GW  = (GMAX > 1) ? $clog2(GMAX) : 1;
  localparam int unsigned AW1 = (G1 > 1) ? $clog2(G1) : 1;
  localparam int unsigned AW2 = (G2 > 1) ? $clog2(G2) : 1;
  localparam int unsigned AW3 = (G3 > 1) ? $clog2(G3) : 1;

  // Controller outputs.
  state_e             state;
  phase_e             phase;
  logic [GW-1:0]      group;
  logic [BIT_W-1:0]   bit_idx;
  logic [CNT_W-1:0]   n_inputs;
  logic               rom_en, clear, acc_en;
  logic               act1_we, act2_we, score_we;
  logic               argmax_start, argmax_done;

  bnn_fsm #(.PAR(PAR)) u_fsm (
    .clk, .rst_n, .argmax_done,
    .state, .phase, .group, .bit_idx, .n_inputs,
    .rom_en, .clear, .acc_en, .act1_we, .act2_we, .score_we,
    .argmax_start, .done
  );

  // Input vector of the current layer, one bit per cycle, shared by all lanes.
  logic [N_IN-1:0]  image;
  logic [N_H1-1:0]  act1;
  logic [N_H2-1:0]  act2;
  logic             x_bit;

  image_rom #(.NUM_IMAGES(NUM_IMAGES), .WIDTH(N_IN)) u_image (
    .clk, .en(rom_en && state == S_L1), .addr(img_sel), .q(image)
  );

  always_comb begin
    unique case (state)
      S_L1:    x_bit = image[bit_idx];
      S_L2:    x_bit = act1[bit_idx[$clog2(N_H1)-1:0]];
      default: x_bit = act2[bit_idx[$clog2(N_H2)-1:0]];
    endcase
  end

  // Parallel neuron lanes with their ROMs.
  logic [PAR-1:0]       lane_act;
  logic [PAR*SUM_W-1:0] lane_z;

  for (genvar k = 0; k < PAR; k++) begin : g_lane
    logic [N_IN-1:0]        q1;
    logic [N_H1-1:0]        q2;
    logic [N_H2-1:0]        q3;
    logic signed [TH_W-1:0] t1, t2, th;
    logic                   w_bit;
    logic signed [SUM_W-1:0] z;
    logic [CNT_W-1:0]       popcount;

    if (k < N_H1) begin : g_l1
      weight_rom #(.LAYER(1), .UNIT(k), .PAR(PAR), .N_NEURONS(N_H1), .WIDTH(N_IN)) u_w (
        .clk, .en_a(rom_en && state == S_L1), .addr_a(group[AW1-1:0]), .q_a(q1),
        .en_b(1'b0), .addr_b('0), .q_b()
      );
      threshold_rom #(.LAYER(1), .UNIT(k), .PAR(PAR), .N_NEURONS(N_H1)) u_t (
        .addr(group[AW1-1:0]), .threshold(t1)
      );
    end else begin : g_no_l1
      assign q1 = '0;
      assign t1 = '0;
    end

    if (k < N_H2) begin : g_l2
      weight_rom #(.LAYER(2), .UNIT(k), .PAR(PAR), .N_NEURONS(N_H2), .WIDTH(N_H1)) u_w (
        .clk, .en_a(rom_en && state == S_L2), .addr_a(group[AW2-1:0]), .q_a(q2),
        .en_b(1'b0), .addr_b('0), .q_b()
      );
      threshold_rom #(.LAYER(2), .UNIT(k), .PAR(PAR), .N_NEURONS(N_H2)) u_t (
        .addr(group[AW2-1:0]), .threshold(t2)
      );
    end else begin : g_no_l2
      assign q2 = '0;
      assign t2 = '0;
    end

    if (k < N_OUT) begin : g_l3
      weight_rom #(.LAYER(3), .UNIT(k), .PAR(PAR), .N_NEURONS(N_OUT), .WIDTH(N_H2)) u_w (
        .clk, .en_a(rom_en && state == S_OUT), .addr_a(group[AW3-1:0]), .q_a(q3),
        .en_b(1'b0), .addr_b('0), .q_b()
      );
    end else begin : g_no_l3
      assign q3 = '0;
    end

    always_comb begin
      unique case (state)
        S_L1:    begin w_bit = q1[bit_idx];                    th = t1; end
        S_L2:    begin w_bit = q2[bit_idx[$clog2(N_H1)-1:0]]; th = t2; end
        default: begin w_bit = q3[bit_idx[$clog2(N_H2)-1:0]]; th = '0; end
      endcase
    end

    neuron_pe u_pe (
      .clk, .rst_n, .clear, .acc_en, .x_bit, .w_bit, .n_inputs,
      .threshold(th), .popcount, .z, .act(lane_act[k])
    );

    assign lane_z[k*SUM_W +: SUM_W] = z;
  end

  // Layer result registers.
  logic [N_OUT*SUM_W-1:0] score_vec;

  act_buffer #(.N_ELEM(N_H1), .DW(1), .PAR(PAR)) u_act1 (
    .clk, .rst_n, .we(act1_we), .group(group[AW1-1:0]), .data(lane_act), .vec(act1)
  );
  act_buffer #(.N_ELEM(N_H2), .DW(1), .PAR(PAR)) u_act2 (
    .clk, .rst_n, .we(act2_we), .group(group[AW2-1:0]), .data(lane_act), .vec(act2)
  );
  act_buffer #(.N_ELEM(N_OUT), .DW(SUM_W), .PAR(PAR)) u_scores (
    .clk, .rst_n, .we(score_we), .group(group[AW3-1:0]), .data(lane_z), .vec(score_vec)
  );

  // Classification and display.
  logic signed [SUM_W-1:0] scores [N_OUT];
  logic [3:0]              best;
  logic signed [SUM_W-1:0] best_val;

  for (genvar j = 0; j < N_OUT; j++) begin : g_score
    assign scores[j] = score_vec[j*SUM_W +: SUM_W];
  end

  argmax_unit #(.N(N_OUT), .SW(SUM_W)) u_argmax (
    .clk, .rst_n, .start(argmax_start), .scores, .idx(best), .max_val(best_val), .done(argmax_done)
  );

  assign digit = best;

  seg7_decoder u_seg (.digit(best), .valid(done), .seg, .an);

endmodule
