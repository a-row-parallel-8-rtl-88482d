// ai_dct_pkg -- constants and types shared by the algebraic-integer (AI) 2-D DCT.
//
// Every intermediate value of the transform is an algebraic integer written over the
// basis z4 = {1, z1, z2, z1*z2} with z1 = sqrt(2+sqrt2)+sqrt(2-sqrt2) and
// z2 = sqrt(2+sqrt2)-sqrt(2-sqrt2). A value is held as up to four integer "channels"
// a, b, c, d (the coefficients of 1, z1, z2, z1*z2). The 8-point Arai DCT produces
// only 22 of the 32 possible channels; CH_MASK lists which ones exist. Everything else
// here (FRS selection, latencies, output widths) is shared by the FRS and the core.
package ai_dct_pkg;

  // AI channel index: coefficient of 1, z1, z2 and z1*z2.
  typedef enum logic [1:0] {CH_A = 2'd0, CH_B = 2'd1, CH_C = 2'd2, CH_D = 2'd3} ai_ch_e;

  // Channels present at output k of the 1-D AI Arai DCT; bit q set = channel q present.
  // X0: a; X4: a; X2, X6: a, d; odd outputs: a, b, c, d (22 channels in all).
  localparam logic [3:0] CH_MASK [8] = '{4'b0001, 4'b1111, 4'b1001, 4'b1111,
                                         4'b0001, 4'b1111, 4'b1001, 4'b1111};

  // Final reconstruction step (FRS) variants.
  //   FRS_DM     : 12-bit approximations of z_p*z_q with Dempster-Macleod multipliers
  //   FRS_EF_12  : expansion factor alpha' ~ 4.5961, constants {12, 5, 13}
  //   FRS_EF_437 : expansion factor alpha* ~ 167.2309, constants {437, 181, 473}
  typedef enum logic [1:0] {FRS_DM = 2'd0, FRS_EF_12 = 2'd1, FRS_EF_437 = 2'd2} frs_kind_e;

  // Pipeline depths (enabled clocks) of the FRS units.
  localparam int unsigned LAT_DM = 7;
  localparam int unsigned LAT_EF = 4;

  // Growth of a 1-D AI DCT: every channel is at most 4 * sum|x|, so 5 bits are enough.
  localparam int unsigned DCT_GROWTH = 5;

  function automatic int unsigned frs_latency(frs_kind_e kind);
    return (kind == FRS_DM) ? LAT_DM : LAT_EF;
  endfunction

  // Fraction bits of the FRS output.
  function automatic int unsigned frs_frac(frs_kind_e kind);
    case (kind)
      FRS_DM:    return 11;
      FRS_EF_12: return 9;
      default:   return 8;
    endcase
  endfunction

  // Output width of an FRS unit fed with W-bit doubly encoded channels.
  function automatic int unsigned frs_out_width(frs_kind_e kind, int unsigned w);
    return (kind == FRS_DM) ? w + 19 : w + 25;
  endfunction

endpackage
