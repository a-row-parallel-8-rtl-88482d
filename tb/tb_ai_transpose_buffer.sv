// tb_ai_transpose_buffer -- drives random column results and checks every tap of
// every line against a history of the inputs: taps[i][q][j] must be the input of
// enabled clock t-i-j (zero before any input), and lines for channels the Arai
// transform does not produce must read zero. ce is randomly low to check holding.
module tb_ai_transpose_buffer;
  import tb_ref_pkg::*;
  localparam int unsigned W = 14;
  logic clk = 0, rst_n = 0, ce = 0;
  logic signed [W-1:0] x [8][4];
  logic signed [W-1:0] taps [8][4][8];
  int checks = 0, failures = 0;

  ai_transpose_buffer #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [W-1:0] hist [$][8][4];   // hist[0] = newest enabled input

  initial begin
    logic signed [W-1:0] cur [8][4];
    for (int i = 0; i < 8; i++) for (int q = 0; q < 4; q++) x[i][q] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < 8; i++) for (int q = 0; q < 4; q++) x[i][q] = $signed(W'($urandom));
      ce = ($urandom % 5) != 0;
      // combinational tap 0 of line 0 shows the current input
      #1;
      checks++;
      if (taps[0][0][0] !== x[0][0]) failures++;
      @(posedge clk);
      if (ce) begin
        cur = x;
        hist.push_front(cur);
      end
      @(negedge clk);
      for (int i = 0; i < 8; i++)
        for (int q = 0; q < 4; q++)
          for (int j = 0; j < 8; j++) begin
            logic signed [W-1:0] e;
            int age;
            age = i + j - 1;   // tap 0 of line 0 is the live input, not checked here
            if (i + j == 0) continue;
            e = (!ch_present(i, q) || age >= hist.size()) ? '0 : hist[age][i][q];
            checks++;
            if (taps[i][q][j] !== e) begin
              failures++;
              if (failures < 10) $display("t=%0d tap[%0d][%0d][%0d]=%0d expected %0d", t, i, q, j, taps[i][q][j], e);
            end
          end
      if (hist.size() > 20) void'(hist.pop_back());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
