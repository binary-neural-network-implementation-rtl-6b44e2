// tb_bnn_fsm: cycle-by-cycle check of the controller.
//
// Small network (20 inputs, 8 and 6 hidden neurons, 10 outputs) with 4
// lanes, so every layer has several groups and the last groups are partly
// idle. The bench builds the expected strobe sequence of one inference
// (per group: a load cycle, N accumulate cycles with bit_idx 0..N-1, a store
// cycle) and compares the controller against it in every cycle. A model of
// the argmax answers argmax_start with argmax_done 10 cycles later. done
// must then stay high, and a second reset must restart the same sequence.
module tb_bnn_fsm;
  import bnn_pkg::*;

  localparam int PAR = 4, NI = 20, N1 = 8, N2 = 6, NO = 10;

  typedef struct {
    state_e st;
    int group;
    int bit_idx;   // -1: don't care
    bit rom_en, clear, acc_en, we1, we2, wes, start, done;
  } step_t;

  logic clk = 1'b0, rst_n = 1'b0;
  logic argmax_done;
  state_e state;
  phase_e phase;
  logic [1:0] group;
  logic [9:0] bit_idx, n_inputs;
  logic rom_en, clear, acc_en, act1_we, act2_we, score_we, argmax_start, done;
  int checks = 0, failures = 0;
  step_t exp_q [$];
  int start_seen_at;
  int cyc;

  always #5 clk = ~clk;

  // The output layer (3 groups) sets the 2-bit group counter, not layer 1.
  bnn_fsm #(.PAR(PAR), .N_I(NI), .N_1(N1), .N_2(N2), .N_O(NO)) dut (
    .clk, .rst_n, .argmax_done, .state, .phase, .group, .bit_idx, .n_inputs,
    .rom_en, .clear, .acc_en, .act1_we, .act2_we, .score_we, .argmax_start, .done
  );

  function automatic step_t mk(state_e st, int g, int b, bit ro, bit cl, bit ac,
                               bit w1, bit w2, bit ws, bit sa, bit dn);
    step_t s;
    s.st = st; s.group = g; s.bit_idx = b; s.rom_en = ro; s.clear = cl; s.acc_en = ac;
    s.we1 = w1; s.we2 = w2; s.wes = ws; s.start = sa; s.done = dn;
    return s;
  endfunction

  task automatic build_expected();
    state_e sts [3] = '{S_L1, S_L2, S_OUT};
    int ns [3] = '{N1, N2, NO};
    int fan [3] = '{NI, N1, N2};
    exp_q.delete();
    for (int l = 0; l < 3; l++) begin
      for (int g = 0; g < (ns[l] + PAR - 1) / PAR; g++) begin
        exp_q.push_back(mk(sts[l], g, -1, 1, 1, 0, 0, 0, 0, 0, 0));
        for (int b = 0; b < fan[l]; b++) exp_q.push_back(mk(sts[l], g, b, 0, 0, 1, 0, 0, 0, 0, 0));
        exp_q.push_back(mk(sts[l], g, -1, 0, 0, 0, l == 0, l == 1, l == 2, 0, 0));
      end
    end
    exp_q.push_back(mk(S_CLASSIFY, 0, -1, 0, 0, 0, 0, 0, 0, 1, 0));
    for (int i = 0; i < 10; i++) exp_q.push_back(mk(S_CLASSIFY, 0, -1, 0, 0, 0, 0, 0, 0, 0, 0));
    for (int i = 0; i < 20; i++) exp_q.push_back(mk(S_DONE, 0, -1, 0, 0, 0, 0, 0, 0, 0, 1));
  endtask

  // argmax model: done 10 cycles after start
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      argmax_done <= 1'b0;
      start_seen_at <= -100;
    end else begin
      if (argmax_start) start_seen_at <= cyc;
      argmax_done <= (cyc == start_seen_at + 9);
    end
  end

  task automatic run_one(int pass);
    int total, first_done;
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    build_expected();
    total = exp_q.size();
    first_done = -1;
    for (int c = 0; c < total; c++) begin
      step_t e;
      bit ok;
      e = exp_q.pop_front();
      ok = (state == e.st) && (rom_en == e.rom_en) && (clear == e.clear) && (acc_en == e.acc_en) &&
           (act1_we == e.we1) && (act2_we == e.we2) && (score_we == e.wes) &&
           (argmax_start == e.start) && (done == e.done);
      if (e.st inside {S_L1, S_L2, S_OUT}) ok = ok && (int'(group) == e.group);
      if (e.bit_idx >= 0) ok = ok && (int'(bit_idx) == e.bit_idx);
      checks++;
      if (!ok) begin
        failures++;
        if (failures < 10)
          $display("FAIL pass %0d cycle %0d: state %s/%s grp %0d bit %0d strobes %b%b%b%b%b%b%b%b exp %s grp %0d bit %0d %b%b%b%b%b%b%b%b",
            pass, c, state.name(), e.st.name(), group, bit_idx,
            rom_en, clear, acc_en, act1_we, act2_we, score_we, argmax_start, done, e.st.name(), e.group, e.bit_idx,
            e.rom_en, e.clear, e.acc_en, e.we1, e.we2, e.wes, e.start, e.done);
      end
      if (done && first_done < 0) first_done = c;
      @(negedge clk);
    end
    // Latency: N+2 cycles per group plus 11 cycles of classification.
    checks++;
    if (first_done != 2 * (NI + 2) + 2 * (N1 + 2) + 3 * (N2 + 2) + 11) begin
      failures++; $display("FAIL latency %0d", first_done);
    end
  endtask

  initial cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    run_one(0);
    run_one(1);   // second inference after a new reset
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
