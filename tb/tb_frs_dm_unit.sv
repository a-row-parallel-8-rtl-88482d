// tb_frs_dm_unit -- random doubly encoded inputs through the Dempster-Macleod FRS.
// Two references: (1) exact, the sum of x[p][q] times the 12-bit approximations of
// z_p*z_q written as plain integer products (669/2^8 = 5352/2^11, ...), which the
// shift-add pipeline must reproduce bit for bit; (2) the true decoded value, from
// which the output may differ only by the 12-bit constant error. Latency 7 is checked
// by streaming a new input every clock.
module tb_frs_dm_unit;
  import tb_ref_pkg::*;
  localparam int unsigned W  = 19;
  localparam int unsigned WO = W + 19;
  localparam int unsigned LAT = 7;
  logic clk = 0, rst_n = 0, ce = 0;
  logic signed [W-1:0] x [4][4];
  logic signed [WO-1:0] y;
  int checks = 0, failures = 0;

  frs_dm_unit #(.W(W), .WO(WO)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // 12-bit approximation of z_p*z_q in units of 2^-11, from the paper's constants.
  function automatic longint capprox(int p, int q);
    longint t [4][4];
    t = '{'{2048, 669*8, 2217, 181*32},
          '{669*8, 437*32, 181*32, 473*32},
          '{2217, 181*32, 2399, 3135*2},
          '{181*32, 473*32, 3135*2, 8*2048}};
    return t[p][q];
  endfunction

  longint exp_q [$];
  real    true_q [$];
  real    mag_q [$];

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    ce = 1;
    for (int t = 0; t < 3000 + LAT; t++) begin
      longint e; real tv, mg;
      e = 0; tv = 0.0; mg = 0.0;
      for (int p = 0; p < 4; p++) for (int q = 0; q < 4; q++) begin
        x[p][q] = (t % 3 == 0) ? $signed(W'($urandom)) : $signed(W'($urandom_range(0, 2000))) - 1000;
        e  += longint'(x[p][q]) * capprox(p, q);
        tv += real'(x[p][q]) * zb(p) * zb(q);
        mg += rabs(real'(x[p][q]));
      end
      exp_q.push_back(e); true_q.push_back(tv); mag_q.push_back(mg);
      @(negedge clk);
      if (t >= LAT - 1 && exp_q.size() > LAT - 1) begin
        longint ee; real tt, mm, yr;
        ee = exp_q.pop_front(); tt = true_q.pop_front(); mm = mag_q.pop_front();
        yr = real'(y) / 2048.0;
        checks += 2;
        if (longint'(y) != ee) begin
          failures++;
          if (failures < 10) $display("t=%0d y=%0d expected %0d", t, y, ee);
        end
        // each 12-bit constant is within 2^-8 relative of the exact product
        if (rabs(yr - tt) > 4e-3 * mm + 1e-9) begin
          failures++;
          if (failures < 10) $display("t=%0d y=%f true %f", t, yr, tt);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
