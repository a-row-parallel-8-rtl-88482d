// ai_dct2d_core -- row-parallel 8x8 2-D DCT computed exactly in algebraic integers.
//
// One 8-pixel image row enters per enabled clock (ce, the Fclock rate). The row is a
// set of integers, so it is already AI-encoded (channel a only). A 1-D AI Arai DCT
// transforms it into 22 integer channels; the AI transpose buffer delays each channel
// on a skewed line; a 3-bit mux control that counts input rows steers, on each clock,
// the eight rows of one column frequency into four parallel 1-D AI DCTs, one per AI
// channel q. Their outputs are doubly encoded coefficients (up to 16 integers each)
// that are still exact. Only the final reconstruction step (ai_frs) approximates,
// separately for every output. No intermediate reconstruction is done between the two
// transforms.
//
// Interface: x_row[i] is pixel i (column i) of a row, unsigned L bits. The first
// enabled clock after reset carries row 0 of a block and blocks follow back to back,
// eight enabled clocks each. in_valid marks real rows; a block is reported only if all
// its rows were valid. Output: in 8 consecutive enabled clocks a block yields its
// horizontal frequencies h = out_hfreq = 0..7; out_coef[v] is the coefficient of
// vertical frequency v and horizontal frequency h, scaled as
//   out_coef[v] = A * g_v g_h s_v s_h * sum_{r,c} x[r][c] cos((2r+1)v pi/16) cos((2c+1)h pi/16)
// with s_0 = 1, s_k = 2cos(k pi/16), g_k = 1 for k in {0,4} and 4 otherwise, and
// A = 2^11 (FRS_DM) or alpha * 2^frac (expansion factor FRS), up to the FRS error.
// out_stb is high for one clock, in the clock after the enabled edge that produced
// an output row. Latency: if row 0 is taken at enabled edge E, h = 0 is produced at
// enabled edge E + 8 + frs_latency(KIND) (E + 12 with the default FRS; with ce always
// high, a row presented in cycle t gives its block's h = 0 in cycle t + 13), and
// h = 1..7 at the following enabled edges. Throughput: one 8x8 block every 8 enabled
// clocks.
// The dataflow follows the paper; the valid tagging, the strobe and the row-0
// alignment after reset are this design's choices.
module ai_dct2d_core import ai_dct_pkg::*; #(
  parameter int unsigned L    = 8,
  parameter frs_kind_e   KIND = FRS_EF_437,
  parameter int unsigned WF   = frs_out_width(KIND, L + 1 + 2 * DCT_GROWTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ce,
  input  logic                 in_valid,
  input  logic [L-1:0]         x_row     [8],
  output logic                 out_stb,
  output logic [2:0]           out_hfreq,
  output logic signed [WF-1:0] out_coef  [8]
);

  localparam int unsigned W0  = L + 1;            // pixel as a signed integer
  localparam int unsigned W1  = W0 + DCT_GROWTH;  // after the column transform
  localparam int unsigned W2  = W1 + DCT_GROWTH;  // after the row transform
  localparam int unsigned LAT = 1 + frs_latency(KIND);   // mux stage to output

  // ---------------------------------------------------------------- row count
  logic [2:0] ph;        // input row number within the block = mux control
  logic       blk_acc;   // all rows of the block so far valid
  logic       win_valid; // block now passing the multiplexers is valid

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph        <= '0;
      blk_acc   <= 1'b0;
      win_valid <= 1'b0;
    end else if (ce) begin
      ph      <= ph + 3'd1;
      blk_acc <= (ph == 3'd0) ? in_valid : (blk_acc & in_valid);
      if (ph == 3'd7) win_valid <= blk_acc & in_valid;
    end
  end

  // ---------------------------------------------------------- column transform
  logic signed [W0-1:0] xs [8];
  logic signed [W1-1:0] col_y [8][4];

  always_comb begin
    for (int i = 0; i < 8; i++) xs[i] = signed'({1'b0, x_row[i]});
  end

  ai_arai_dct8 #(.WI(W0), .WO(W1)) u_col (
    .clk, .rst_n, .ce, .x(xs), .y(col_y)
  );

  // ------------------------------------------------------- AI transpose buffer
  logic signed [W1-1:0] taps [8][4][8];

  ai_transpose_buffer #(.W(W1)) u_tb (
    .clk, .rst_n, .ce, .x(col_y), .taps
  );

  // ----------------------- cross-connections and row transforms, one per channel
  logic signed [W2-1:0] row_y [4][8][4];   // [q][u][p]
  logic signed [W2-1:0] frs_x [8][4][4];   // [u][p][q]

  for (genvar q = 0; q < 4; q++) begin : g_row
    logic signed [W1-1:0] tq [8][8];
    for (genvar i = 0; i < 8; i++) begin : g_i
      for (genvar j = 0; j < 8; j++) begin : g_j
        assign tq[i][j] = taps[i][q][j];
      end
    end
    ai_row_dct_block #(.W(W1)) u_blk (
      .clk, .rst_n, .ce, .sel(ph), .taps(tq), .y(row_y[q])
    );
    for (genvar u = 0; u < 8; u++) begin : g_u
      for (genvar p = 0; p < 4; p++) begin : g_p
        assign frs_x[u][p][q] = row_y[q][u][p];
      end
    end
  end

  // ------------------------------------------------- final reconstruction step
  ai_frs #(.W(W2), .KIND(KIND), .WF(WF)) u_frs (
    .clk, .rst_n, .ce, .x(frs_x), .y(out_coef)
  );

  // ---------------------------------------- valid and frequency alongside data
  logic [LAT-1:0] v_pipe;
  logic [2:0]     h_pipe [LAT];
  logic           ce_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_pipe <= '0;
      for (int n = 0; n < LAT; n++) h_pipe[n] <= '0;
      ce_q <= 1'b0;
    end else begin
      ce_q <= ce;
      if (ce) begin
        v_pipe    <= {v_pipe[LAT-2:0], win_valid};
        h_pipe[0] <= ph;
        for (int n = 1; n < LAT; n++) h_pipe[n] <= h_pipe[n-1];
      end
    end
  end

  assign out_stb   = ce_q & v_pipe[LAT-1];
  assign out_hfreq = h_pipe[LAT-1];

endmodule
