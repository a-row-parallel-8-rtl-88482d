// tb_ai_dct2d_top -- end-to-end test of the whole design at its default parameters
// (8-bit pixels, alpha* expansion-factor FRS). A raster pixel stream of random and
// structured 8x8 blocks is fed one pixel per clock, at first continuously and then
// with random pauses; every output row is compared with alpha times the scaled 2-D
// cosine sum of its block, and the frequency order, block count, latency and
// throughput (a block every 64 pixel clocks) are checked. Mechanisms counted:
// continuous streaming (back-to-back output blocks), input pauses, all 8 mux codes.
module tb_ai_dct2d_top;
  import tb_ref_pkg::*;
  import ai_dct_pkg::*;
  localparam int unsigned L = 8;
  localparam int unsigned WF = frs_out_width(FRS_EF_437, L + 11);
  localparam int unsigned NBLK = 40;
  localparam real ALPHA = real'(2**15 + 2**13 + 2**11 - 2**8 + 2**6 - 2**2 - 1) / 256.0;

  logic clk = 0, rst_n = 0, pix_valid = 0;
  logic [L-1:0] pix = '0;
  logic out_stb;
  logic [2:0] out_hfreq;
  logic signed [WF-1:0] out_coef [8];
  int checks = 0, failures = 0;
  int n_pause = 0, n_b2b = 0, n_out_blocks = 0;
  int hseen [8];

  ai_dct2d_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real out_blk [$][8][8];
  int cyc = 0, first_pix_cyc = -1, first_out_cyc = -1, last_h0_cyc = -1, n_full_rate = 0;
  real max_err = 0.0;
  always @(posedge clk) cyc++;

  int exp_h = 0;
  always @(negedge clk) if (rst_n && out_stb) begin
    if (first_out_cyc < 0) first_out_cyc = cyc;
    checks++;
    if (int'(out_hfreq) != exp_h) begin failures++; $display("hfreq %0d expected %0d", out_hfreq, exp_h); end
    hseen[out_hfreq]++;
    checks++;
    if (out_blk.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      for (int v = 0; v < 8; v++) begin
        real e, got, err;
        e = ALPHA * dct2_ref(out_blk[0], v, int'(out_hfreq));
        got = real'(out_coef[v]) / 256.0;
        err = rabs(got - e);
        if (err > max_err) max_err = err;
        checks++;
        if (err > 1000.0) begin
          failures++; if (failures < 10) $display("coef v=%0d h=%0d %f vs %f", v, out_hfreq, got, e);
        end
      end
      if (out_hfreq == 7) begin void'(out_blk.pop_front()); n_out_blocks++; end
    end
    if (out_hfreq == 0) begin
      if (last_h0_cyc >= 0 && cyc - last_h0_cyc == 64) n_full_rate++;
      if (last_h0_cyc >= 0 && cyc - last_h0_cyc <= 64) n_b2b++;
      last_h0_cyc = cyc;
    end
    exp_h = (exp_h + 1) % 8;
  end

  task automatic send_block(int b, bit pauses);
    real blk [8][8];
    for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++) begin
      int pv;
      case (b % 5)
        0: pv = 255;
        1: pv = ((r + c) % 2 != 0) ? 255 : 0;
        2: pv = (c < 4) ? 0 : 255;
        default: pv = int'($urandom_range(0, 255));
      endcase
      blk[r][c] = real'(pv);
    end
    out_blk.push_back(blk);
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < 8; c++) begin
        if (pauses && ($urandom % 4) == 0) begin
          @(negedge clk); pix_valid = 0; n_pause++;
        end
        @(negedge clk);
        pix_valid = 1;
        pix = L'(int'(blk[r][c]));
        if (first_pix_cyc < 0) first_pix_cyc = cyc;
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int b = 0; b < NBLK; b++) send_block(b, b >= NBLK / 2);
    // four blocks of zeros push the last real block (and two of them) out of the
    // pipeline; a block's h = 7 leaves 11 rows after its own last row
    for (int k = 0; k < 4; k++) begin
      real zb8 [8][8];
      for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++) zb8[r][c] = 0.0;
      out_blk.push_back(zb8);
    end
    for (int k = 0; k < 4 * 64; k++) begin
      @(negedge clk); pix_valid = 1; pix = '0;
    end
    @(negedge clk); pix_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (n_out_blocks != NBLK + 2) begin failures++; $display("blocks out %0d expected %0d", n_out_blocks, NBLK + 2); end
    // latency of the continuous stream: row 0 is taken by the core 8 clocks after
    // pixel 0; h = 0 is produced 8 + 4 enabled edges (8 clocks each) later and is
    // visible in the clock after that edge
    checks++;
    if (first_out_cyc - first_pix_cyc != 8 + 8 * (8 + LAT_EF) + 1) begin
      failures++; $display("latency %0d clocks, expected %0d", first_out_cyc - first_pix_cyc, 8 + 8 * (8 + LAT_EF) + 1);
    end
    checks++; if (n_pause == 0) begin failures++; $display("no pause exercised"); end
    checks++; if (n_full_rate == 0) begin failures++; $display("no full-rate blocks"); end
    for (int h = 0; h < 8; h++) begin checks++; if (hseen[h] == 0) failures++; end
    $display("blocks %0d, full-rate block gaps %0d, paused clocks %0d, max |err| %f (alpha units)",
             n_out_blocks, n_full_rate, n_pause, max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
