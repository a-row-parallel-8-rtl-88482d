// tb_ai_row_dct_block -- random transpose-buffer taps and mux control; the block must
// transform the column (tap 7-j of line sel for input j) exactly: every output's
// channels decoded with the exact basis must equal the cosine-sum reference.
module tb_ai_row_dct_block;
  import tb_ref_pkg::*;
  localparam int unsigned W = 14;
  logic clk = 0, rst_n = 0, ce = 0;
  logic [2:0] sel;
  logic signed [W-1:0] taps [8][8];
  logic signed [W+4:0] y [8][4];
  int checks = 0, failures = 0;
  int sel_seen [8];

  ai_row_dct_block #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real col [8];
    sel = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++)
        taps[i][j] = $signed(W'($urandom_range(0, 2**W - 1)));
      sel = 3'($urandom);
      sel_seen[sel]++;
      for (int j = 0; j < 8; j++) col[j] = real'(taps[sel][7-j]);   // row j of the block
      ce = 1;
      @(negedge clk);
      ce = 0;
      for (int u = 0; u < 8; u++) begin
        real dec, e;
        dec = 0.0;
        for (int p = 0; p < 4; p++) dec += real'(y[u][p]) * zb(p);
        e = dct1_ref(col, u);
        checks++;
        if (rabs(dec - e) > 1e-6 * (1.0 + rabs(e))) begin
          failures++;
          if (failures < 10) $display("sel=%0d u=%0d got %f expected %f", sel, u, dec, e);
        end
      end
    end
    for (int s = 0; s < 8; s++) begin checks++; if (sel_seen[s] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
