// tb_ai_arai_dct8 -- checks the 1-D AI Arai DCT against a cosine-sum reference.
// Random signed inputs go in with ce high (and sometimes low, when the output must
// hold). Each output's four channels are decoded with the exact basis values and must
// equal g_k s_k S_k to within floating-point rounding, which (the channels being
// integers and the basis irrational) means the transform is exact. Channels the
// transform never produces must be zero. Latency must be one enabled clock.
module tb_ai_arai_dct8;
  import tb_ref_pkg::*;

  localparam int unsigned WI = 9;
  localparam int unsigned WO = WI + 5;

  logic clk = 0, rst_n = 0, ce = 0;
  logic signed [WI-1:0] x [8];
  logic signed [WO-1:0] y [8][4];
  int checks = 0, failures = 0;

  ai_arai_dct8 #(.WI(WI), .WO(WO)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_out(real xr [8]);
    for (int k = 0; k < 8; k++) begin
      real dec, ref_v;
      dec = 0.0;
      for (int q = 0; q < 4; q++) begin
        dec += real'(y[k][q]) * zb(q);
        if (!ch_present(k, q)) begin
          checks++;
          if (y[k][q] != 0) begin failures++; $display("absent channel %0d/%0d = %0d", k, q, y[k][q]); end
        end
      end
      ref_v = dct1_ref(xr, k);
      checks++;
      if (rabs(dec - ref_v) > 1e-6 * (1.0 + rabs(ref_v))) begin
        failures++;
        $display("k=%0d decoded %f expected %f", k, dec, ref_v);
      end
    end
  endtask

  initial begin
    real xr [8];
    for (int n = 0; n < 8; n++) x[n] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int n = 0; n < 8; n++) begin
        case (t % 4)
          0: x[n] = $signed(WI'($urandom));                              // full range
          1: x[n] = (($urandom % 2) != 0) ? -(2**(WI-1)) : (2**(WI-1)-1); // extremes
          default: x[n] = $signed(WI'($urandom_range(0, 255)));          // pixels
        endcase
        xr[n] = real'(x[n]);
      end
      ce = 1;
      @(negedge clk);            // one enabled edge later the result is there
      check_out(xr);
      // with ce low the output must hold
      ce = 0;
      for (int n = 0; n < 8; n++) x[n] = $signed(WI'($urandom));
      @(negedge clk);
      check_out(xr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
