// tb_bnn_top: end-to-end test of the inference engine at its default size
// (784-128-64-10 network, 64 parallel lanes, 10 stored images).
//
// For every stored image the bench resets the engine, waits for done and
// compares: the layer-1 and layer-2 activation registers and the ten output
// sums against the reference model, the predicted digit and the display
// pattern, and the latency (1779 cycles at 64 lanes). It then checks that
// the result holds for 100 cycles. One extra run is reset halfway through
// layer 1 and must still give the right answer. Mechanisms counted (each
// must occur): layer changes, a layer spread over several neuron groups, a
// group with idle lanes, threshold decisions, argmax updates, an argmax tie, result hold
// and restart after a mid-inference reset.
module tb_bnn_top;
  import tb_ref_pkg::*;
  import bnn_pkg::S_L1, bnn_pkg::S_L2, bnn_pkg::S_OUT, bnn_pkg::S_CLASSIFY, bnn_pkg::PH_ACC, bnn_pkg::state_e;

  localparam int PAR = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [3:0] img_sel;
  logic done;
  logic [3:0] digit;
  logic [6:0] seg;
  logic [7:0] an;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_l1_to_l2 = 0, n_l2_to_out = 0, n_out_to_cls = 0, n_multi_group = 0;
  int n_idle_lane_groups = 0, n_thr_writes = 0, n_argmax_updates = 0, n_hold = 0, n_restart = 0;
  int n_threshold_ties = 0, n_argmax_ties = 0;

  always #5 clk = ~clk;

  bnn_top dut (.clk, .rst_n, .img_sel, .done, .digit, .seg, .an);

  // Watch the controller for the mechanisms.
  state_e prev_state;
  always @(posedge clk) begin
    if (rst_n) begin
      if (prev_state == S_L1 && dut.state == S_L2) n_l1_to_l2++;
      if (prev_state == S_L2 && dut.state == S_OUT) n_l2_to_out++;
      if (prev_state == S_OUT && dut.state == S_CLASSIFY) n_out_to_cls++;
      if (dut.state == S_L1 && dut.phase == PH_ACC && dut.group != 0 && dut.bit_idx == 0) n_multi_group++;
      if (dut.score_we && (int'(dut.group) + 1) * PAR > R_OUT) n_idle_lane_groups++;
      if (dut.act1_we || dut.act2_we) n_thr_writes++;
      if (dut.u_argmax.busy && dut.u_argmax.scores[dut.u_argmax.cur] > dut.u_argmax.max_val) n_argmax_updates++;
    end
    prev_state <= dut.state;
  end

  function automatic logic [6:0] seg_of(int d);
    case (d)
      0: return 7'b100_0000; 1: return 7'b111_1001; 2: return 7'b010_0100; 3: return 7'b011_0000;
      4: return 7'b001_1001; 5: return 7'b001_0010; 6: return 7'b000_0010; 7: return 7'b111_1000;
      8: return 7'b000_0000; default: return 7'b001_0000;
    endcase
  endfunction

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run_image(int img, bit mid_reset);
    bit a1 [R_H1];
    bit a2 [R_H2];
    int s [R_OUT];
    int ties, cls, cyc, bad;
    cls = r_infer(img, a1, a2, s, ties);
    if (ties > 0) n_argmax_ties++;
    for (int j = 0; j < R_H1; j++) begin
      int m;
      m = 0;
      for (int i = 0; i < R_IN; i++) m += (r_pixel(img, i) == r_weight(1, j, i)) ? 1 : 0;
      if (2 * m - R_IN == r_threshold(1, j)) n_threshold_ties++;
    end
    img_sel = 4'(img);
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    if (mid_reset) begin
      repeat (400) @(negedge clk);
      rst_n = 0;
      @(negedge clk);
      rst_n = 1;
      n_restart++;
    end
    cyc = 0;
    while (!done && cyc < 5000) begin
      @(negedge clk);
      cyc++;
    end
    check($sformatf("image %0d latency %0d, expected %0d", img, cyc, r_latency(PAR)), cyc == r_latency(PAR));
    bad = 0;
    for (int j = 0; j < R_H1; j++) if (dut.act1[j] != a1[j]) bad++;
    check($sformatf("image %0d layer-1 activations (%0d wrong)", img, bad), bad == 0);
    bad = 0;
    for (int j = 0; j < R_H2; j++) if (dut.act2[j] != a2[j]) bad++;
    check($sformatf("image %0d layer-2 activations (%0d wrong)", img, bad), bad == 0);
    bad = 0;
    for (int j = 0; j < R_OUT; j++) if (int'(dut.scores[j]) != s[j]) bad++;
    check($sformatf("image %0d output sums (%0d wrong)", img, bad), bad == 0);
    check($sformatf("image %0d digit %0d, expected %0d", img, digit, cls), int'(digit) == cls);
    check($sformatf("image %0d display", img), seg == seg_of(cls) && an == 8'b1111_1110);
    $display("image %0d: class %0d (sums %0d %0d %0d %0d %0d %0d %0d %0d %0d %0d) in %0d cycles",
             img, digit, s[0], s[1], s[2], s[3], s[4], s[5], s[6], s[7], s[8], s[9], cyc);
    // The result must hold until reset.
    bad = 0;
    repeat (100) begin
      @(negedge clk);
      if (!done || int'(digit) != cls) bad++;
    end
    check($sformatf("image %0d result held", img), bad == 0);
    if (bad == 0) n_hold++;
  endtask

  initial begin
    img_sel = 0;
    for (int img = 0; img < 10; img++) run_image(img, 1'b0);
    run_image(7, 1'b1);
    $display("mechanisms: L1->L2 %0d, L2->OUT %0d, OUT->CLASSIFY %0d, extra L1 groups %0d, groups with idle lanes %0d",
             n_l1_to_l2, n_l2_to_out, n_out_to_cls, n_multi_group, n_idle_lane_groups);
    $display("mechanisms: activation writes %0d, argmax updates %0d, argmax ties %0d, results held %0d, mid-run resets %0d, z==threshold in layer 1 %0d",
             n_thr_writes, n_argmax_updates, n_argmax_ties, n_hold, n_restart, n_threshold_ties);
    check("layer change L1->L2 seen", n_l1_to_l2 > 0);
    check("layer change L2->OUT seen", n_l2_to_out > 0);
    check("layer change OUT->CLASSIFY seen", n_out_to_cls > 0);
    check("multi-group layer seen", n_multi_group > 0);
    check("idle lanes seen", n_idle_lane_groups > 0);
    check("threshold writes seen", n_thr_writes > 0);
    check("argmax updates seen", n_argmax_updates > 0);
    check("argmax tie seen", n_argmax_ties > 0);
    check("result hold seen", n_hold > 0);
    check("restart seen", n_restart > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
