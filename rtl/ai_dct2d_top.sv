// ai_dct2d_top -- complete row-parallel 2-D AI DCT: raster pixel stream in,
// reconstructed 8x8 DCT coefficients out.
//
// The input is the byte stream of an external serial link (deserialiser not included),
// one pixel per clock at the pixel rate Fs, of an image already cut into 8x8 blocks and
// stacked so that each block is 8 consecutive rows of 8 pixels. ai_decimator collects
// 8 pixels into a row and produces the Fs/8 enable; ai_dct2d_core computes the exact
// AI-domain 2-D transform and the final reconstruction. Pixels may pause (pix_valid
// low); the core then simply waits. The first valid pixel after reset is pixel 0 of
// row 0 of a block. Output format and scaling are those of ai_dct2d_core: per block,
// 8 strobes (out_stb) carrying horizontal frequency out_hfreq and the 8 vertical
// frequencies in out_coef[0..7]. Latency with a continuous stream and the default FRS:
// out_stb for h = 0 rises 105 clocks (8 + 8 * 12 + 1) after pixel 0 is presented;
// a block's eight output rows come every 8 clocks.
// Defaults: 8-bit pixels and the alpha* expansion-factor FRS.
module ai_dct2d_top import ai_dct_pkg::*; #(
  parameter int unsigned L    = 8,
  parameter frs_kind_e   KIND = FRS_EF_437,
  parameter int unsigned WF   = frs_out_width(KIND, L + 1 + 2 * DCT_GROWTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 pix_valid,
  input  logic [L-1:0]         pix,
  output logic                 out_stb,
  output logic [2:0]           out_hfreq,
  output logic signed [WF-1:0] out_coef [8]
);

  logic         row_stb;
  logic [L-1:0] row [8];

  ai_decimator #(.L(L)) u_dec (
    .clk, .rst_n, .pix_valid, .pix, .row_stb, .row
  );

  ai_dct2d_core #(.L(L), .KIND(KIND), .WF(WF)) u_core (
    .clk, .rst_n, .ce(row_stb), .in_valid(1'b1), .x_row(row),
    .out_stb, .out_hfreq, .out_coef
  );

endmodule
