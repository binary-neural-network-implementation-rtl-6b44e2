// tb_bnn_par_sweep: the parallelism sweep (1, 4, 8, 16, 32, 128 lanes).
//
// Builds the engine once per parallelism level, classifies the same image
// with all of them at once, and checks for each level the predicted digit
// against the reference model and the latency against
// sum_l ceil(M_l/PAR)*(N_l+2) + 11 cycles. It also compares the latency with
// the published per-level latencies of the original design, which fit this
// cycle count when read at a 10 ns clock period, and requires agreement to
// within 1%. The 64-lane default is covered by tb_bnn_top.
module tb_bnn_par_sweep;
  import tb_ref_pkg::*;

  localparam int NL = 6;
  localparam int PARS [NL] = '{1, 4, 8, 16, 32, 128};
  // Published latencies in ns (block-RAM builds; the 128-lane build is LUT-only).
  localparam int PAPER_NS [NL] = '{1096045, 274465, 137645, 68905, 34865, 9865};
  localparam int IMG = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NL-1:0] done;
  logic [3:0] digit [NL];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar p = 0; p < NL; p++) begin : g_par
    logic [6:0] seg;
    logic [7:0] an;
    bnn_top #(.PAR(PARS[p])) dut (
      .clk, .rst_n, .img_sel(4'(IMG)), .done(done[p]), .digit(digit[p]), .seg, .an
    );
  end

  initial begin
    bit a1 [R_H1];
    bit a2 [R_H2];
    int s [R_OUT];
    int ties, cls, cyc;
    int seen [NL];
    cls = r_infer(IMG, a1, a2, s, ties);
    foreach (seen[p]) seen[p] = -1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    cyc = 0;
    while (done != '1 && cyc < 120000) begin
      @(negedge clk);
      cyc++;
      for (int p = 0; p < NL; p++) if (done[p] && seen[p] < 0) seen[p] = cyc;
    end
    for (int p = 0; p < NL; p++) begin
      real dev;
      dev = (real'(seen[p]) * 10.0 - real'(PAPER_NS[p])) / real'(PAPER_NS[p]);
      $display("PAR %3d: digit %0d (expected %0d), %0d cycles (expected %0d), %0d ns at 10 ns vs %0d ns published (%.2f%%)",
               PARS[p], digit[p], cls, seen[p], r_latency(PARS[p]), seen[p] * 10, PAPER_NS[p], dev * 100.0);
      checks++;
      if (int'(digit[p]) != cls) begin failures++; $display("FAIL PAR %0d digit", PARS[p]); end
      checks++;
      if (seen[p] != r_latency(PARS[p])) begin failures++; $display("FAIL PAR %0d latency", PARS[p]); end
      checks++;
      if (dev > 0.01 || dev < -0.01) begin failures++; $display("FAIL PAR %0d differs from published latency", PARS[p]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (130000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
