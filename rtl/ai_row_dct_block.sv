// ai_row_dct_block -- row-wise AI DCT for one AI channel q of the column results.
//
// Eight 8:1 multiplexers, all driven by the same 3-bit mux control sel, choose for DCT
// input j the tap 7-j of transpose-buffer line sel: these are rows 0..7 of column
// frequency sel of one block. An ai_arai_dct8 transforms them; since its inputs are
// the q-components of AI numbers, its outputs y[u][p] are the p-components of the
// q-component of the 2-D result, i.e. a doubly encoded coefficient X^(p)(q). Four
// instances (q = a, b, c, d) form the paper's 32 multiplexers and four row cores.
// sel must step 0..7 in step with the input rows (the core uses the input row count).
// Output registered: one enabled clock from sel/taps to y. The mux arrangement follows
// the paper; the tap each multiplexer takes is derived from the buffer's skew.
module ai_row_dct_block import ai_dct_pkg::*; #(
  parameter int unsigned W = 14
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           ce,
  input  logic [2:0]                     sel,
  input  logic signed [W-1:0]            taps [8][8],   // [line i][tap j]
  output logic signed [W+DCT_GROWTH-1:0] y    [8][4]
);

  logic signed [W-1:0] xm [8];

  always_comb begin
    for (int j = 0; j < 8; j++) xm[j] = taps[sel][7-j];
  end

  ai_arai_dct8 #(.WI(W), .WO(W + DCT_GROWTH)) u_dct (
    .clk, .rst_n, .ce, .x(xm), .y
  );

endmodule
