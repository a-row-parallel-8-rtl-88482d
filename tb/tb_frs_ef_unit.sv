// tb_frs_ef_unit -- random doubly encoded inputs through both expansion-factor FRS
// variants. The reference folds the 16 integers to Y^(a..d) by the exact basis
// identities (checked here against the true decoded value), then forms
// alpha*Ya + m1*Yb + m2*Yc + m3*Yd with ordinary multiplications, using alpha from its
// Booth code. The RTL must match bit for bit, and alpha times the true value to
// within the expansion-factor error. Latency 4, one input per clock.
module tb_frs_ef_unit;
  import tb_ref_pkg::*;
  import ai_dct_pkg::*;
  localparam int unsigned W  = 19;
  localparam int unsigned WO = W + 25;
  localparam int unsigned LAT = 4;
  logic clk = 0, rst_n = 0, ce = 0;
  logic signed [W-1:0] x [4][4];
  logic signed [WO-1:0] y437, y12;
  int checks = 0, failures = 0;

  frs_ef_unit #(.W(W), .ALPHA(FRS_EF_437), .WO(WO)) dut437 (.clk, .rst_n, .ce, .x, .y(y437));
  frs_ef_unit #(.W(W), .ALPHA(FRS_EF_12),  .WO(WO)) dut12  (.clk, .rst_n, .ce, .x, .y(y12));
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // alpha from the Booth codes, in units of 2^-8 and 2^-9
  localparam longint A437 = 2**15 + 2**13 + 2**11 - 2**8 + 2**6 - 2**2 - 1;
  localparam longint A12  = 2**11 + 2**8 + 2**5 + 2**4 + 1;

  longint e437_q [$], e12_q [$];
  real t437_q [$], t12_q [$], m_q [$];

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    ce = 1;
    for (int t = 0; t < 3000 + LAT; t++) begin
      longint ya, yb, yc, yd, xx [4][4];
      real tv, mg;
      tv = 0.0; mg = 0.0;
      for (int p = 0; p < 4; p++) for (int q = 0; q < 4; q++) begin
        x[p][q] = (t % 3 == 0) ? $signed(W'($urandom)) : $signed(W'($urandom_range(0, 2000))) - 1000;
        xx[p][q] = longint'(x[p][q]);
        tv += real'(x[p][q]) * zb(p) * zb(q);
        mg += rabs(real'(x[p][q]));
      end
      ya = xx[0][0] + 4 * (xx[1][1] + xx[2][2]) + 8 * xx[3][3];
      yb = xx[1][0] + xx[0][1] + 2 * (xx[3][1] + xx[3][2] + xx[1][3] + xx[2][3]);
      yc = xx[2][0] + xx[0][2] + 2 * (xx[3][1] - xx[3][2] + xx[1][3] - xx[2][3]);
      yd = xx[3][0] + xx[1][1] + xx[2][1] + xx[1][2] - xx[2][2] + xx[0][3];
      checks++;
      if (rabs(real'(ya) + real'(yb) * zb(1) + real'(yc) * zb(2) + real'(yd) * zb(3) - tv)
          > 1e-6 * (1.0 + rabs(tv))) failures++;
      e437_q.push_back(A437 * ya + 256 * (437 * yb + 181 * yc + 473 * yd));
      e12_q.push_back(A12 * ya + 512 * (12 * yb + 5 * yc + 13 * yd));
      t437_q.push_back(tv * real'(A437) / 256.0);
      t12_q.push_back(tv * real'(A12) / 512.0);
      m_q.push_back(mg);
      @(negedge clk);
      if (t >= LAT - 1 && e437_q.size() > LAT - 1) begin
        longint a, b; real ta, tb, mm;
        a = e437_q.pop_front(); b = e12_q.pop_front();
        ta = t437_q.pop_front(); tb = t12_q.pop_front(); mm = m_q.pop_front();
        checks += 4;
        if (longint'(y437) != a) begin failures++; if (failures < 10) $display("437: %0d vs %0d", y437, a); end
        if (longint'(y12) != b)  begin failures++; if (failures < 10) $display("12: %0d vs %0d", y12, b); end
        // |m - alpha z| is below 0.02 (alpha*) and 0.1 (alpha'); |Y| <= 17 * sum|x|
        if (rabs(real'(y437) / 256.0 - ta) > 0.02 * 17.0 * mm + 1e-6) failures++;
        if (rabs(real'(y12) / 512.0 - tb) > 0.1 * 17.0 * mm + 1e-6) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
