// tb_ai_dct2d_core -- 2-D AI DCT core with random 8x8 pixel blocks.
// Checks, for every valid block and every horizontal frequency h:
//  * exactness: the doubly encoded integers entering the FRS, decoded with the exact
//    basis, equal g_v g_h s_v s_h times the 2-D cosine sum (to float rounding);
//  * the reconstructed outputs equal alpha times that value within the FRS error;
//  * ordering (h = 0..7 on consecutive strobes), latency (h = 0 produced 8 + 4
//    enabled edges after the edge that takes row 0) and throughput (one block per 8 enabled clocks when streaming).
// Mechanisms exercised and counted: back-to-back blocks, enable gaps (stalls), a
// block with an invalid row (must produce no output), all 8 mux control codes.
module tb_ai_dct2d_core;
  import tb_ref_pkg::*;
  import ai_dct_pkg::*;
  localparam int unsigned L = 8;
  localparam int unsigned WF = frs_out_width(FRS_EF_437, L + 11);
  localparam int unsigned NBLK = 60;
  localparam int unsigned LATENCY = 1 + 8 + LAT_EF;   // counter difference: row 0's edge counts too
  localparam real ALPHA = real'(2**15 + 2**13 + 2**11 - 2**8 + 2**6 - 2**2 - 1) / 256.0;

  logic clk = 0, rst_n = 0, ce = 0, in_valid = 0;
  logic [L-1:0] x_row [8];
  logic out_stb;
  logic [2:0] out_hfreq;
  logic signed [WF-1:0] out_coef [8];
  int checks = 0, failures = 0;
  int n_stall = 0, n_dropped = 0, n_b2b = 0, n_out_blocks = 0, n_exact = 0;
  int hseen [8];

  ai_dct2d_core #(.L(L)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real exp_blk [$][8][8];      // reference blocks still to be checked at the FRS input
  real out_blk [$][8][8];      // ... and at the output
  int  ce_edges = 0, row0_edge = -1, first_out_edge = -1;
  real max_err = 0.0;

  always @(posedge clk) if (rst_n && ce) ce_edges++;

  // exactness monitor at the FRS input
  always @(negedge clk) if (rst_n && dut.ce_q && dut.v_pipe[0]) begin
    int h;
    h = int'(dut.h_pipe[0]);
    for (int v = 0; v < 8; v++) begin
      real dec, e;
      dec = 0.0;
      for (int p = 0; p < 4; p++) for (int q = 0; q < 4; q++)
        dec += real'(dut.frs_x[v][p][q]) * zb(p) * zb(q);
      e = dct2_ref(exp_blk[0], v, h);
      checks++;
      n_exact++;
      if (rabs(dec - e) > 1e-7 * (1.0 + rabs(e))) begin
        failures++; if (failures < 10) $display("AI value v=%0d h=%0d %f vs %f", v, h, dec, e);
      end
    end
    if (h == 7) void'(exp_blk.pop_front());
  end

  int exp_h = 0;
  int last_out_edge = -100;
  always @(negedge clk) if (rst_n && out_stb) begin
    if (first_out_edge < 0) first_out_edge = ce_edges;
    checks++;
    if (int'(out_hfreq) != exp_h) begin failures++; $display("hfreq %0d expected %0d", out_hfreq, exp_h); end
    hseen[out_hfreq]++;
    for (int v = 0; v < 8; v++) begin
      real e, got, err;
      e = ALPHA * dct2_ref(out_blk[0], v, int'(out_hfreq));
      got = real'(out_coef[v]) / 256.0;
      err = rabs(got - e);
      if (err > max_err) max_err = err;
      checks++;
      if (err > 1000.0) begin   // about 10x the largest FRS error seen
        failures++; if (failures < 10) $display("coef v=%0d h=%0d %f vs %f", v, out_hfreq, got, e);
      end
    end
    if (out_hfreq == 7) begin
      void'(out_blk.pop_front());
      n_out_blocks++;
    end
    if (out_hfreq == 0 && ce_edges == last_out_edge + 1) n_b2b++;
    last_out_edge = ce_edges;
    exp_h = (exp_h + 1) % 8;
  end

  task automatic send_block(int b, bit gaps, bit bad_row);
    real blk [8][8];
    int kind;
    kind = b % 6;
    for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++) begin
      int pv;
      case (kind)
        0: pv = 255;                                  // flat, full scale
        1: pv = ((r + c) % 2 != 0) ? 255 : 0;         // checkerboard: highest frequency
        default: pv = int'($urandom_range(0, 255));
      endcase
      blk[r][c] = real'(pv);
    end
    for (int r = 0; r < 8; r++) begin
      if (gaps) begin
        int g;
        g = int'($urandom_range(0, 3));
        for (int k = 0; k < g; k++) begin
          @(negedge clk); ce = 0; in_valid = 0; n_stall++;
        end
      end
      @(negedge clk);
      ce = 1;
      in_valid = !(bad_row && r == 3);
      for (int c = 0; c < 8; c++) x_row[c] = L'(int'(blk[r][c]));
      if (row0_edge < 0) row0_edge = ce_edges;
    end
    if (bad_row) n_dropped++;
    else begin
      exp_blk.push_back(blk);
      out_blk.push_back(blk);
    end
  endtask

  initial begin
    for (int c = 0; c < 8; c++) x_row[c] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int b = 0; b < NBLK; b++)
      send_block(b, b >= NBLK / 2, b == 10 || b == 40);
    // flush with invalid rows
    for (int k = 0; k < 40; k++) begin
      @(negedge clk); ce = 1; in_valid = 0;
    end
    @(negedge clk); ce = 0;
    repeat (4) @(negedge clk);
    // latency: output h = 0 of block 0 must be produced by enabled edge row0 + LATENCY
    checks++;
    if (first_out_edge - row0_edge != LATENCY) begin
      failures++; $display("latency %0d expected %0d", first_out_edge - row0_edge, LATENCY);
    end
    checks++;
    if (n_out_blocks != NBLK - 2) begin failures++; $display("blocks out %0d expected %0d", n_out_blocks, NBLK - 2); end
    checks++; if (out_blk.size() != 0) failures++;
    // mechanisms
    checks++; if (n_stall == 0) begin failures++; $display("no stall exercised"); end
    checks++; if (n_dropped == 0) begin failures++; $display("no invalid block exercised"); end
    checks++; if (n_b2b == 0) begin failures++; $display("no back-to-back blocks"); end
    for (int h = 0; h < 8; h++) begin checks++; if (hseen[h] == 0) failures++; end
    $display("blocks %0d, back-to-back %0d, stalls %0d, dropped %0d, exact checks %0d, max |err| %f (alpha units)",
             n_out_blocks, n_b2b, n_stall, n_dropped, n_exact, max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
