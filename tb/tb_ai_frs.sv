// tb_ai_frs -- the eight-port FRS in its default (alpha* expansion factor) and
// Dempster-Macleod forms. Each port gets random values in the channels that port can
// carry (88 of 128) and zeros elsewhere; the outputs are compared with alpha (or 1)
// times the true decoded value after the stated latency (4 and 7), every clock.
module tb_ai_frs;
  import tb_ref_pkg::*;
  import ai_dct_pkg::*;
  localparam int unsigned W = 19;
  localparam int unsigned WE = frs_out_width(FRS_EF_437, W);
  localparam int unsigned WD = frs_out_width(FRS_DM, W);
  logic clk = 0, rst_n = 0, ce = 0;
  logic signed [W-1:0]  x [8][4][4];
  logic signed [WE-1:0] ye [8];
  logic signed [WD-1:0] yd [8];
  int checks = 0, failures = 0;

  ai_frs #(.W(W)) dut_ef (.clk, .rst_n, .ce, .x, .y(ye));
  ai_frs #(.W(W), .KIND(FRS_DM)) dut_dm (.clk, .rst_n, .ce, .x, .y(yd));
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam real ALPHA = real'(2**15 + 2**13 + 2**11 - 2**8 + 2**6 - 2**2 - 1) / 256.0;
  real tv_q [$][8];
  real mg_q [$][8];

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    ce = 1;
    for (int t = 0; t < 2000; t++) begin
      real tv [8], mg [8];
      for (int u = 0; u < 8; u++) begin
        tv[u] = 0.0; mg[u] = 0.0;
        for (int p = 0; p < 4; p++) for (int q = 0; q < 4; q++) begin
          x[u][p][q] = ch_present(u, p) ? $signed(W'($urandom_range(0, 20000))) - 10000 : '0;
          tv[u] += real'(x[u][p][q]) * zb(p) * zb(q);
          mg[u] += rabs(real'(x[u][p][q]));
        end
      end
      tv_q.push_back(tv); mg_q.push_back(mg);
      @(negedge clk);
      if (t >= 6) begin
        // DM output for input t-6 (latency 7), EF output for input t-3 (latency 4)
        real td [8], te [8], md [8], me [8];
        td = tv_q[t-6]; md = mg_q[t-6]; te = tv_q[t-3]; me = mg_q[t-3];
        for (int u = 0; u < 8; u++) begin
          checks += 2;
          if (rabs(real'(yd[u]) / 2048.0 - td[u]) > 4e-3 * md[u] + 1e-9) begin
            failures++; if (failures < 10) $display("DM u=%0d %f vs %f", u, real'(yd[u]) / 2048.0, td[u]);
          end
          if (rabs(real'(ye[u]) / 256.0 - ALPHA * te[u]) > 0.34 * me[u] + 1e-9) begin
            failures++; if (failures < 10) $display("EF u=%0d %f vs %f", u, real'(ye[u]) / 256.0, ALPHA * te[u]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
