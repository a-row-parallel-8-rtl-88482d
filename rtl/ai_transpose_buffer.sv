// ai_transpose_buffer -- real-time AI transpose buffer (AI-TB).
//
// The column transform delivers, every enabled clock, the 22 AI channels of the eight
// coefficients X_i (i = 0..7) of one image row. For each present channel (i, q) this
// buffer keeps a delay line: a pre-delay of i clocks followed by 7 unit delays, giving
// eight taps taps[i][q][j] = X_i^(q) delayed by i + j clocks (22 lines x 8 taps = 176
// outputs). Because line i is skewed by i clocks, all eight rows of frequency i of a
// block sit on taps j = 7..0 of line i exactly i clocks after the block's last row
// was produced, one frequency per clock. The multiplexers of ai_row_dct_block then pick
// them up, which performs the 8x8 transposition with no memory addressing at all.
// Channels that the Arai transform never produces have no line and read as zero.
// Structure and delays follow the paper; reset to zero is this design's choice.
module ai_transpose_buffer import ai_dct_pkg::*; #(
  parameter int unsigned W = 14
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                ce,
  input  logic signed [W-1:0] x    [8][4],
  output logic signed [W-1:0] taps [8][4][8]
);

  for (genvar i = 0; i < 8; i++) begin : g_freq
    for (genvar q = 0; q < 4; q++) begin : g_ch
      if (CH_MASK[i][q]) begin : g_line
        localparam int unsigned DEPTH = i + 7;
        logic signed [W-1:0] d [DEPTH+1];   // d[n] = input delayed by n
        assign d[0] = x[i][q];
        always_ff @(posedge clk or negedge rst_n) begin
          if (!rst_n) begin
            for (int n = 1; n <= DEPTH; n++) d[n] <= '0;
          end else if (ce) begin
            for (int n = 1; n <= DEPTH; n++) d[n] <= d[n-1];
          end
        end
        for (genvar j = 0; j < 8; j++) begin : g_tap
          assign taps[i][q][j] = d[i+j];
        end
      end else begin : g_none
        for (genvar j = 0; j < 8; j++) begin : g_tap
          assign taps[i][q][j] = '0;
        end
      end
    end
  end

endmodule
