// tb_act_buffer: checks the group-wise result register.
//
// Two instances: a 1-bit activation register of 10 elements with 4 lanes
// (last group only half used) and a 3-bit score register of the same shape.
// Random groups are written with random data, with random idle cycles, and
// the full vector is compared with a model after every cycle.
module tb_act_buffer;
  localparam int N = 10, PAR = 4, DW = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic we;
  logic [1:0] group;
  logic [PAR-1:0] d1;
  logic [PAR*DW-1:0] d3;
  logic [N-1:0] v1;
  logic [N*DW-1:0] v3;
  logic [N-1:0] m1;
  logic [N*DW-1:0] m3;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  act_buffer #(.N_ELEM(N), .DW(1), .PAR(PAR)) dut1 (.clk, .rst_n, .we, .group, .data(d1), .vec(v1));
  act_buffer #(.N_ELEM(N), .DW(DW), .PAR(PAR)) dut3 (.clk, .rst_n, .we, .group, .data(d3), .vec(v3));

  initial begin
    we = 0; group = 0; d1 = 0; d3 = 0;
    m1 = '0; m3 = '0;
    repeat (2) @(negedge clk);
    checks++;
    if (v1 !== '0 || v3 !== '0) begin failures++; $display("FAIL reset value"); end
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      we = 1'($urandom_range(3) != 0);
      group = 2'($urandom_range(2));
      d1 = PAR'($urandom);
      d3 = (PAR*DW)'($urandom);
      if (we) begin
        for (int k = 0; k < PAR; k++) begin
          int e;
          e = int'(group) * PAR + k;
          if (e < N) begin
            m1[e] = d1[k];
            for (int b = 0; b < DW; b++) m3[e * DW + b] = d3[k * DW + b];
          end
        end
      end
      @(negedge clk);
      checks++;
      if (v1 !== m1) begin failures++; $display("FAIL act t=%0d got %b exp %b", t, v1, m1); end
      checks++;
      if (v3 !== m3) begin failures++; $display("FAIL score t=%0d got %h exp %h", t, v3, m3); end
    end
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
