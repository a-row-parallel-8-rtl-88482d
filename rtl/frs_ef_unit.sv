// frs_ef_unit -- expansion-factor final reconstruction for one output port.
//
// Products of basis elements fold back onto the basis exactly: z1^2 = 4 + z1z2,
// z2^2 = 4 - z1z2, z1^2 z2 = 2(z1+z2), z1 z2^2 = 2(z1-z2), z1^2 z2^2 = 8. A
// combinational block therefore turns the 16 doubly encoded integers x[p][q] into
// four integers Y^(a..d) with X = Ya + Yb z1 + Yc z2 + Yd z1z2, without error.
// X is then scaled by an expansion factor alpha chosen so that alpha*z1, alpha*z2 and
// alpha*z1z2 are nearly integers m1, m2, m3:
//   ALPHA = FRS_EF_437: alpha* = 2^7+2^5+2^3-2^0+2^-2-2^-6-2^-8, {m} = {437, 181, 473}
//   ALPHA = FRS_EF_12 : alpha' = 2^2+2^-1+2^-4+2^-5+2^-9,      {m} = {12, 5, 13}
// and y = alpha*Ya + m1*Yb + m2*Yc + m3*Yd, with alpha*Ya a shift-add (Booth-coded)
// product and the m-terms computed with shared sub-sums:
//   473(b+c+d) - 36(b+c) - 256c    or    8(b+d) + 4(b+c+d) + d + c.
// The 1/alpha is left to the stage that follows (normally the quantiser).
// y has 8 (alpha*) or 9 (alpha') fraction bits. Timing: 4 enabled clocks from x to y
// (Y, first adder level, products, final sum). The arithmetic follows the paper; the
// pipeline registers and the widths are this design's choices.
module frs_ef_unit import ai_dct_pkg::*; #(
  parameter int unsigned W     = 19,
  parameter frs_kind_e   ALPHA = FRS_EF_437,
  parameter int unsigned WO    = W + 25
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ce,
  input  logic signed [W-1:0]  x [4][4],   // [p][q]
  output logic signed [WO-1:0] y
);

  typedef logic signed [WO-1:0] word_t;

  localparam int unsigned FR = frs_frac(ALPHA);

  word_t xe [4][4];
  word_t nya, nyb, nyc, nyd;
  word_t ya, yb, yc, yd;                 // stage 1
  word_t s1, s2, s3, pa1, pa2, pa3;      // stage 2
  word_t lin, al;                        // stage 3

  always_comb begin
    for (int p = 0; p < 4; p++)
      for (int q = 0; q < 4; q++) xe[p][q] = word_t'(x[p][q]);
    nya = xe[CH_A][CH_A] + ((xe[CH_B][CH_B] + xe[CH_C][CH_C]) <<< 2) + (xe[CH_D][CH_D] <<< 3);
    nyb = xe[CH_B][CH_A] + xe[CH_A][CH_B]
        + ((xe[CH_D][CH_B] + xe[CH_D][CH_C] + xe[CH_B][CH_D] + xe[CH_C][CH_D]) <<< 1);
    nyc = xe[CH_C][CH_A] + xe[CH_A][CH_C]
        + ((xe[CH_D][CH_B] - xe[CH_D][CH_C] + xe[CH_B][CH_D] - xe[CH_C][CH_D]) <<< 1);
    nyd = xe[CH_D][CH_A] + xe[CH_B][CH_B] + xe[CH_C][CH_B] + xe[CH_B][CH_C]
        - xe[CH_C][CH_C] + xe[CH_A][CH_D];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ya <= '0; yb <= '0; yc <= '0; yd <= '0;
      s1 <= '0; s2 <= '0; s3 <= '0; pa1 <= '0; pa2 <= '0; pa3 <= '0;
      lin <= '0; al <= '0; y <= '0;
    end else if (ce) begin
      ya <= nya; yb <= nyb; yc <= nyc; yd <= nyd;
      if (ALPHA == FRS_EF_12) begin
        s1  <= yb + yd;                       // b + d
        s2  <= yb + yc + yd;                  // b + c + d
        s3  <= yd + yc;                       // d + c
        pa1 <= (ya <<< 11) + (ya <<< 8);      // 2^2 + 2^-1   (x 2^9)
        pa2 <= (ya <<< 5) + (ya <<< 4);       // 2^-4 + 2^-5
        pa3 <= ya;                            // 2^-9
        lin <= ((s1 <<< 3) + (s2 <<< 2) + s3) <<< FR;
      end else begin
        s1  <= yb + yc + yd;                  // b + c + d
        s2  <= yb + yc;                       // b + c
        s3  <= yc;                            // c
        pa1 <= (ya <<< 15) + (ya <<< 13);     // 2^7 + 2^5    (x 2^8)
        pa2 <= (ya <<< 11) - (ya <<< 8);      // 2^3 - 2^0
        pa3 <= (ya <<< 6) - (ya <<< 2) - ya;  // 2^-2 - 2^-6 - 2^-8
        // 473 s1 - 36 s2 - 256 s3, with 473 = 512 - 32 - 8 + 1 and 36 = 32 + 4
        lin <= ((s1 <<< 9) - (s1 <<< 5) - (s1 <<< 3) + s1
              - (s2 <<< 5) - (s2 <<< 2) - (s3 <<< 8)) <<< FR;
      end
      al <= pa1 + pa2 + pa3;
      y  <= al + lin;
    end
  end

endmodule
