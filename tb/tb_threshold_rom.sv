// tb_threshold_rom: checks the folded-threshold ROM of one lane.
//
// Lane 5 of 4 lanes is not valid, so two lanes are tested: lane 1 of 4 over
// 10 neurons (rows for neurons 1, 5, 9) and lane 3 of 4 (neurons 3, 7, then
// an empty row). The read is combinational: the value is checked 1 ns after
// the address changes.
module tb_threshold_rom;
  import tb_ref_pkg::*;

  logic [1:0] addr;
  logic signed [10:0] t_a, t_b;
  int checks = 0, failures = 0;

  threshold_rom #(.LAYER(2), .UNIT(1), .PAR(4), .N_NEURONS(10)) dut_a (.addr, .threshold(t_a));
  threshold_rom #(.LAYER(2), .UNIT(3), .PAR(4), .N_NEURONS(10)) dut_b (.addr, .threshold(t_b));

  int distinct;

  initial begin
    distinct = 0;
    for (int r = 0; r < 3; r++) begin
      int ea, eb;
      addr = 2'(r);
      #1;
      ea = r_threshold(2, r * 4 + 1);
      eb = (r * 4 + 3 < 10) ? r_threshold(2, r * 4 + 3) : 0;
      checks++;
      if (int'(t_a) != ea) begin failures++; $display("FAIL lane1 row %0d got %0d exp %0d", r, t_a, ea); end
      checks++;
      if (int'(t_b) != eb) begin failures++; $display("FAIL lane3 row %0d got %0d exp %0d", r, t_b, eb); end
      if (t_a != t_b) distinct++;
    end
    // Range of the placeholder thresholds over a full hidden layer.
    for (int j = 0; j < 128; j++) begin
      checks++;
      if (r_threshold(1, j) < -16 || r_threshold(1, j) > 16) failures++;
    end
    checks++;
    if (distinct == 0) begin failures++; $display("FAIL lanes not distinct"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
