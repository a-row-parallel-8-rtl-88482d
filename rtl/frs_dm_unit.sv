// frs_dm_unit -- Dempster-Macleod final reconstruction for one output port.
//
// A doubly encoded coefficient is X = sum_{p,q} x[p][q] * z_p * z_q over the basis
// z = {1, z1, z2, z1z2}. The ten distinct products z_p*z_q are replaced by their
// closest 12-bit approximations: 1, 669/2^8, 2217/2^11, 181/2^6, 437/2^6, 473/2^6,
// 2399/2^11, 3135/2^10 and 8 (exact). Each of the 16 inputs goes through a shift-add
// constant multiplier (frs_dm_mult); the power-of-two divisions are kept exact by
// carrying 11 fraction bits, so the only error is that of the 12-bit constants.
// For each column channel q the four products are added in a two-level registered
// tree (the four sub-results X^(q)*z_q), and a last registered adder sums the four.
// Output y is X in two's complement with 11 fraction bits.
// Timing: 7 enabled clocks from x to y (4 in the multipliers, 2 in the per-channel
// tree, 1 final). Constants, multipliers and the per-channel pipeline follow the
// paper; the final adder stage and the widths are this design's choices.
module frs_dm_unit import ai_dct_pkg::*; #(
  parameter int unsigned W  = 19,
  parameter int unsigned WO = W + 19
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ce,
  input  logic signed [W-1:0]  x [4][4],   // [p][q]
  output logic signed [WO-1:0] y
);

  localparam int unsigned FRAC = 11;
  localparam int unsigned WM   = W + 13;   // multiplier output width

  typedef logic signed [WO-1:0] word_t;

  // 12-bit approximation of z_p*z_q = CONST / 2^(11-SHIFT).
  function automatic int dm_const(int p, int q);
    int key;
    key = (p < q) ? 4 * p + q : 4 * q + p;   // unordered pair (lo, hi)
    case (key)
      0:       return 1;      // 1
      1:       return 669;    // z1
      2:       return 2217;   // z2
      3:       return 181;    // z1z2
      5:       return 437;    // z1^2
      6:       return 181;    // z1z2
      7:       return 473;    // z1^2 z2
      10:      return 2399;   // z2^2
      11:      return 3135;   // z1 z2^2
      default: return 8;      // z1^2 z2^2
    endcase
  endfunction

  function automatic int dm_shift(int p, int q);
    case (dm_const(p, q))
      1, 8:        return FRAC;   // exact integers
      669:         return 3;      // /2^8
      2217, 2399:  return 0;      // /2^11
      3135:        return 1;      // /2^10
      default:     return 5;      // /2^6
    endcase
  endfunction

  word_t prod [4][4];          // [q][p], scaled to 2^-FRAC
  word_t pair [4][2];
  word_t term [4];

  for (genvar q = 0; q < 4; q++) begin : g_q
    for (genvar p = 0; p < 4; p++) begin : g_p
      logic signed [WM-1:0] m;
      frs_dm_mult #(.M(dm_const(p, q)), .W(W), .WO(WM)) u_mult (
        .clk, .rst_n, .ce, .x(x[p][q]), .y(m)
      );
      assign prod[q][p] = word_t'(m) <<< dm_shift(p, q);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int q = 0; q < 4; q++) begin
        pair[q][0] <= '0; pair[q][1] <= '0; term[q] <= '0;
      end
      y <= '0;
    end else if (ce) begin
      for (int q = 0; q < 4; q++) begin
        pair[q][0] <= prod[q][0] + prod[q][1];
        pair[q][1] <= prod[q][2] + prod[q][3];
        term[q]    <= pair[q][0] + pair[q][1];
      end
      y <= (term[0] + term[1]) + (term[2] + term[3]);
    end
  end

endmodule
