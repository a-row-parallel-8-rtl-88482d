// ai_arai_dct8 -- 8-point Arai DCT computed exactly over the algebraic-integer basis.
//
// The Arai (AAN) flow graph needs only four irrational constants: c4, c6, c2-c6 and
// c2+c6 (cn = cos(n*pi/16)). Scaled by 4 they are exact, sparse AI numbers with
// power-of-two entries: 4c4 = z1z2, 4c6 = z1 - z2, 4(c2-c6) = 2z2, 4(c2+c6) = 2z1.
// Multiplying an integer by one of them therefore only routes it (shifted) into another
// channel, and the whole transform is a tree of adders with no rounding anywhere.
// Input: eight signed integers (all in channel a). Output: y[k][q], channel q of
// coefficient k, with y[k] decoding to g_k * s_k * S_k, where S_k = sum_n x_n
// cos((2n+1)k*pi/16), s_0 = 1, s_k = 2cos(k*pi/16) (the Arai output scaling) and
// g_k = 1 for k = 0, 4 and 4 otherwise (the factor 4 of the AI constants). Channels
// that the Arai graph never produces (see ai_dct_pkg::CH_MASK) are constant zero.
// The same block is used for column transforms and, once per AI channel, for the
// row transforms: a linear transform of channel q data just becomes the q-part of a
// doubly encoded result.
//
// Timing: the outputs are registered; a result appears one enabled clock (ce) after its
// input. The butterfly and the AI encodings follow the paper; the output register,
// the reset and the widths (WO = WI + 5 covers the worst-case gain of 32) are this
// design's choices.
module ai_arai_dct8 import ai_dct_pkg::*; #(
  parameter int unsigned WI = 9,
  parameter int unsigned WO = WI + DCT_GROWTH
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ce,
  input  logic signed [WI-1:0] x [8],
  output logic signed [WO-1:0] y [8][4]
);

  typedef logic signed [WO-1:0] word_t;

  word_t xe [8];
  word_t t0, t1, t2, t3, t4, t5, t6, t7;   // first butterfly
  word_t e10, e11, e12, e13;               // even part
  word_t o10, o11, o12, osum, odif;        // odd part
  word_t yc [8][4];

  always_comb begin
    for (int n = 0; n < 8; n++) xe[n] = word_t'(x[n]);
    t0 = xe[0] + xe[7];  t7 = xe[0] - xe[7];
    t1 = xe[1] + xe[6];  t6 = xe[1] - xe[6];
    t2 = xe[2] + xe[5];  t5 = xe[2] - xe[5];
    t3 = xe[3] + xe[4];  t4 = xe[3] - xe[4];
    e10 = t0 + t3;  e13 = t0 - t3;
    e11 = t1 + t2;  e12 = t1 - t2;
    o10 = t4 + t5;  o11 = t5 + t6;  o12 = t6 + t7;
    osum = o10 + o12;   // carried in z1 / z2 by the (c2+-c6) and c6 products
    odif = o10 - o12;
    for (int k = 0; k < 8; k++)
      for (int q = 0; q < 4; q++) yc[k][q] = '0;
    // Even outputs: X0, X4 plain integers; X2, X6 = 4*e13 +- c4*4*(e12+e13).
    yc[0][CH_A] = e10 + e11;
    yc[4][CH_A] = e10 - e11;
    yc[2][CH_A] = e13 <<< 2;
    yc[2][CH_D] = e12 + e13;
    yc[6][CH_A] = e13 <<< 2;
    yc[6][CH_D] = -(e12 + e13);
    // Odd outputs: 4*z5 = odif*(z1 - z2); 4*z2' = 2z2*o10 + 4*z5; 4*z4 = 2z1*o12 + 4*z5;
    // 4*z3 = o11*z1z2; z11/z13 = 4*t7 +- 4*z3.
    yc[5][CH_A] = t7 <<< 2;  yc[5][CH_B] = odif;   yc[5][CH_C] = osum;   yc[5][CH_D] = -o11;
    yc[3][CH_A] = t7 <<< 2;  yc[3][CH_B] = -odif;  yc[3][CH_C] = -osum;  yc[3][CH_D] = -o11;
    yc[1][CH_A] = t7 <<< 2;  yc[1][CH_B] = osum;   yc[1][CH_C] = -odif;  yc[1][CH_D] = o11;
    yc[7][CH_A] = t7 <<< 2;  yc[7][CH_B] = -osum;  yc[7][CH_C] = odif;   yc[7][CH_D] = o11;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < 8; k++)
        for (int q = 0; q < 4; q++) y[k][q] <= '0;
    end else if (ce) begin
      for (int k = 0; k < 8; k++)
        for (int q = 0; q < 4; q++) y[k][q] <= yc[k][q];
    end
  end

endmodule
