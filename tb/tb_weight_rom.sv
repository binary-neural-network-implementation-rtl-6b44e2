// tb_weight_rom: checks weight_rom contents, lane indexing and read timing.
//
// Uses 48 lanes over 128 neurons, so lane 40 has rows for neurons 40 and 88
// and a third, empty row. Every row is read through both ports and compared
// bit by bit with the reference hash; the output must follow one clock after
// the enable and hold while the enable is low.
module tb_weight_rom;
  import tb_ref_pkg::*;

  localparam int PAR = 48, UNIT = 40, NN = 128, W = 784, DEPTH = 3;

  logic clk = 1'b0;
  logic en_a, en_b;
  logic [1:0] addr_a, addr_b;
  logic [W-1:0] q_a, q_b;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  weight_rom #(.LAYER(1), .UNIT(UNIT), .PAR(PAR), .N_NEURONS(NN), .WIDTH(W)) dut (
    .clk, .en_a, .addr_a, .q_a, .en_b, .addr_b, .q_b
  );

  function automatic logic [W-1:0] expect_row(int r);
    logic [W-1:0] v;
    for (int i = 0; i < W; i++) v[i] = (r * PAR + UNIT < NN) ? r_weight(1, r * PAR + UNIT, i) : 1'b0;
    return v;
  endfunction

  task automatic check(string what, logic [W-1:0] got, logic [W-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: %0d bits differ", what, $countones(got ^ exp));
    end
  endtask

  initial begin
    en_a = 0; en_b = 0; addr_a = 0; addr_b = 0;
    @(negedge clk);
    for (int r = 0; r < DEPTH; r++) begin
      en_a = 1; addr_a = 2'(r);
      en_b = 1; addr_b = 2'(DEPTH - 1 - r);
      @(negedge clk);
      check($sformatf("port A row %0d", r), q_a, expect_row(r));
      check($sformatf("port B row %0d", DEPTH - 1 - r), q_b, expect_row(DEPTH - 1 - r));
    end
    // Hold: change address with enable low, output must not move.
    en_a = 0; en_b = 0; addr_a = 2'd0; addr_b = 2'd1;
    @(negedge clk);
    @(negedge clk);
    check("port A hold", q_a, expect_row(DEPTH - 1));
    check("port B hold", q_b, expect_row(0));
    // Row 1 again on port A to check that reads follow the enable.
    en_a = 1; addr_a = 2'd1;
    @(negedge clk);
    check("port A re-read", q_a, expect_row(1));
    // Sanity: the hashed rows are not trivially constant.
    checks++;
    if ($countones(q_a) < 300 || $countones(q_a) > 484) begin
      failures++;
      $display("FAIL weight density %0d", $countones(q_a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
