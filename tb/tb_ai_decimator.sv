// tb_ai_decimator -- feeds a raster pixel stream with random pauses and checks that
// every 8 valid pixels give exactly one row strobe, in the clock after the eighth
// pixel, with row[i] equal to the i-th pixel of that group.
module tb_ai_decimator;
  localparam int unsigned L = 8;
  logic clk = 0, rst_n = 0, pix_valid = 0;
  logic [L-1:0] pix = '0;
  logic row_stb;
  logic [L-1:0] row [8];
  int checks = 0, failures = 0, stalls = 0;

  ai_decimator #(.L(L)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [L-1:0] sent [$];
  int nvalid = 0;

  // monitor: a strobe must come exactly one clock after every 8th valid pixel
  logic expect_stb = 0;
  always @(negedge clk) if (rst_n) begin
    checks++;
    if (row_stb !== expect_stb) begin failures++; $display("strobe %0b expected %0b", row_stb, expect_stb); end
    if (row_stb) begin
      for (int i = 0; i < 8; i++) begin
        logic [L-1:0] e;
        e = sent.pop_front();
        checks++;
        if (row[i] !== e) begin failures++; $display("row[%0d]=%0h expected %0h", i, row[i], e); end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      pix_valid = ($urandom % 4) != 0;
      if (!pix_valid) stalls++;
      pix = L'($urandom);
      @(posedge clk);
      #1;
      expect_stb = 0;
      if (pix_valid) begin
        sent.push_back(pix);
        nvalid++;
        if (nvalid % 8 == 0) expect_stb = 1;
      end
    end
    @(negedge clk); pix_valid = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (stalls == 0) failures++;
    $display("rows %0d, stall cycles %0d", nvalid / 8, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
