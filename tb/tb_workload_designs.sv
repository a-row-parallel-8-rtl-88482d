// tb_workload_designs -- the six evaluated configurations side by side:
//   Design 1/2: Dempster-Macleod FRS, 4/8-bit pixels
//   Design 3/4: expansion factor {12, 5, 13}, 4/8-bit pixels
//   Design 5/6: expansion factor {437, 181, 473}, 4/8-bit pixels
// All six cores see the same stream of random 8x8 blocks (the 4-bit designs the low
// 4 bits). For each design the share of coefficients within 10%, 5%, 1%, 0.1%,
// 0.05%, 0.01% and 0.005% of the exact (floating-point) scaled DCT is printed.
// Checks: every design outputs every block; all designs are within 10% on at least
// 95% of coefficients; and the accuracy ranking at 0.1% is {437,181,473} best and
// {12,5,13} worst, as the constants' approximation errors predict.
module tb_workload_designs;
  import ai_dct_pkg::*;
  localparam int NBLK = 500;
  logic clk = 0, rst_n = 0, ce = 0;
  logic [7:0] x_row [8];
  int checks = 0, failures = 0;

  wl_design_meter #(.L(4), .KIND(FRS_DM))     d1 (.*);
  wl_design_meter #(.L(8), .KIND(FRS_DM))     d2 (.*);
  wl_design_meter #(.L(4), .KIND(FRS_EF_12))  d3 (.*);
  wl_design_meter #(.L(8), .KIND(FRS_EF_12))  d4 (.*);
  wl_design_meter #(.L(4), .KIND(FRS_EF_437)) d5 (.*);
  wl_design_meter #(.L(8), .KIND(FRS_EF_437)) d6 (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (NBLK * 8 + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic report(int n, real r [7], int unsigned blocks);
    $display("Design %0d: %8.4f %8.4f %8.4f %8.4f %8.4f %8.4f %8.4f  (%0d blocks)",
             n, r[0], r[1], r[2], r[3], r[4], r[5], r[6], blocks);
    checks++;
    if (blocks < NBLK) begin failures++; $display("design %0d output %0d blocks", n, blocks); end
    checks++;
    if (r[0] < 95.0) begin failures++; $display("design %0d: within-10%% rate too low", n); end
  endtask

  initial begin
    real r [6][7];
    for (int c = 0; c < 8; c++) x_row[c] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    ce = 1;
    for (int t = 0; t < (NBLK + 2) * 8; t++) begin
      for (int c = 0; c < 8; c++) x_row[c] = 8'($urandom);
      @(negedge clk);
    end
    ce = 0;
    for (int k = 0; k < 7; k++) begin
      r[0][k] = d1.rate(k); r[1][k] = d2.rate(k); r[2][k] = d3.rate(k);
      r[3][k] = d4.rate(k); r[4][k] = d5.rate(k); r[5][k] = d6.rate(k);
    end
    $display("Success rate (%%) within  10%%      5%%       1%%     0.1%%    0.05%%   0.01%%   0.005%%");
    report(1, r[0], d1.blocks); report(2, r[1], d2.blocks); report(3, r[2], d3.blocks);
    report(4, r[3], d4.blocks); report(5, r[4], d5.blocks); report(6, r[5], d6.blocks);
    checks++;
    if (!(r[5][3] > r[1][3] && r[1][3] > r[3][3])) begin
      failures++; $display("unexpected accuracy ranking at 0.1%%");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
